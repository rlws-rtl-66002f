// action_selector: epsilon-greedy choice of the SELECT_PIPELINE action.
//
// An action other than NO_INSTR is possible when at least one warp of the
// scheduler's pool is ready with an instruction of that class (possible[]).
// NO_INSTR is always possible except right after a NO_INSTR while another
// action is possible: the agent may idle on purpose, but not two cycles in a
// row when it had a choice.
//   exploit: the allowed action with the highest Q value.  Ties go to the
//            lowest-numbered pipeline action; NO_INSTR wins only when its Q
//            value is strictly the highest.
//   explore: taken when rnd < epsilon (both fractions of 2^16); the action is
//            the first allowed one at or after rnd_act mod 5 in cyclic order.
// Purely combinational.  'explored' tells which of the two was used.
//
// The rules come from the paper (greedy choice among possible actions, random
// action with the exploration probability, NO_INSTR not repeated); the tie
// order and the way the random action is drawn are this design's choices.
module action_selector
  import rlws_pkg::*;
(
  input  q_arr_t              q,
  input  logic [NUM_ACT-1:0]  possible,     // bit 0 (NO_INSTR) is ignored
  input  logic                last_no_instr,// previous action was NO_INSTR
  input  rate_t               epsilon,
  input  logic [15:0]         rnd,          // uniform random fraction
  input  logic [2:0]          rnd_act,      // random start for exploration
  output action_e             action,
  output logic                explored,
  output logic [NUM_ACT-1:0]  allowed
);
  logic    any_other;
  action_e best, pick;

  always_comb begin
    any_other  = |possible[NUM_ACT-1:1];
    allowed    = possible;
    allowed[0] = !(last_no_instr && any_other);

    // greedy: scan pipeline actions first, NO_INSTR last, strict '>'
    best = ACT_NO_INSTR;
    begin
      logic  found;
      qval_t bq;
      found = 1'b0;
      bq    = '0;
      for (int a = 1; a < int'(NUM_ACT); a++) begin
        if (allowed[a] && (!found || $signed(q[a]) > bq)) begin
          found = 1'b1;
          bq    = $signed(q[a]);
          best  = action_e'(a);
        end
      end
      if (allowed[0] && (!found || $signed(q[0]) > bq))
        best = ACT_NO_INSTR;
    end

    // random: first allowed action at or after the random start
    pick = ACT_NO_INSTR;
    begin
      int   start;
      logic got;
      start = int'(rnd_act) % int'(NUM_ACT);
      got   = 1'b0;
      for (int k = 0; k < int'(NUM_ACT); k++) begin
        int idx;
        idx = (start + k) % int'(NUM_ACT);
        if (!got && allowed[idx]) begin
          got  = 1'b1;
          pick = action_e'(idx);
        end
      end
    end

    explored = (rnd < epsilon);
    action   = explored ? pick : best;
  end
endmodule
