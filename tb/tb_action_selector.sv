// tb_action_selector: random Q values (often tied), possible-action sets,
// previous-NO_INSTR flags and random numbers.  A reference model computes
// the allowed set, the greedy choice (highest Q, ties to the lowest pipeline
// action, NO_INSTR only when strictly best) and the exploration choice, and
// the test checks the exploration frequency for epsilon = 0.04.
module tb_action_selector;
  import rlws_pkg::*;
  int checks = 0, failures = 0;
  q_arr_t q;
  logic [NUM_ACT-1:0] possible, allowed;
  logic last_no, explored;
  rate_t eps;
  logic [15:0] rnd;
  logic [2:0] rnd_act;
  action_e action;
  int n_exp = 0;

  action_selector dut (.q(q), .possible(possible), .last_no_instr(last_no),
    .epsilon(eps), .rnd(rnd), .rnd_act(rnd_act), .action(action),
    .explored(explored), .allowed(allowed));

  initial begin
    for (int n = 0; n < 20000; n++) begin
      logic [NUM_ACT-1:0] al;
      int best, exp_act, bq;
      logic ex;
      for (int a = 0; a < int'(NUM_ACT); a++) q[a] = Q_W'($signed($urandom_range(6)) - 3);
      possible = NUM_ACT'($urandom);
      last_no  = 1'($urandom);
      eps      = (n < 10000) ? EPS_DEF : rate_t'($urandom);
      rnd      = 16'($urandom);
      rnd_act  = 3'($urandom);
      #1;
      al = possible;
      al[0] = !(last_no && (possible[4:1] != 0));
      // greedy reference: collect best among pipeline actions in index order
      best = -1; bq = 0;
      for (int a = 1; a < 5; a++)
        if (al[a] && (best < 0 || int'($signed(q[a])) > bq)) begin best = a; bq = int'($signed(q[a])); end
      if (al[0] && (best < 0 || int'($signed(q[0])) > bq)) best = 0;
      ex = (rnd < eps);
      if (ex) begin
        exp_act = -1;
        for (int k = 0; k < 5; k++)
          if (exp_act < 0 && al[(int'(rnd_act) % 5 + k) % 5]) exp_act = (int'(rnd_act) % 5 + k) % 5;
      end else exp_act = best;
      if (n < 10000 && ex) n_exp++;
      checks++;
      if (int'(action) != exp_act || explored != ex || allowed != al) begin
        failures++;
        $display("FAIL n=%0d got %0d expected %0d", n, action, exp_act);
      end
    end
    // exploration rate 0.04 over 10000 draws: expect 400, accept 300..500
    checks++;
    if (n_exp < 300 || n_exp > 500) begin failures++; $display("FAIL exploration count %0d", n_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
