// rlws_scheduler: one reinforcement-learning warp scheduler (the agent).
//
// Each cycle, for its pool of WPS warp slots:
//   1. q_value_unit computes Q(s_c,a) of the five actions from the shared
//      weights theta and the current state s_c;
//   2. the possible actions are the instruction classes for which at least
//      one warp is ready (SFU or MEM classes are masked when the other
//      scheduler of the SM already took that shared pipeline this cycle);
//   3. action_selector makes the epsilon-greedy choice a_c, with two LFSRs as
//      random source;
//   4. warp_selector picks the warp (previous warp if it matches, else the
//      oldest) and the scheduler issues it.
// It also keeps the SARSA history for the learning unit: the previous
// action a_p, its value Q(s_p,a_p) and the reward r (a warp was issued in
// that cycle).  q_c, the value of the current choice, goes to the learning
// unit in the same cycle.
//
// Interface: issue_valid/issue_idx/action are combinational from the warp
// status, the state register and theta; history registers update at the
// clock edge.  'kernel_start' invalidates the history.
//
// The agent structure is the paper's; the random source and the masking of
// a shared pipeline are this design's choices.
module rlws_scheduler
  import rlws_pkg::*;
#(
  parameter int unsigned WPS   = 24,
  parameter logic [15:0] SEED  = 16'hACE1,
  localparam int unsigned IDX_W = (WPS > 1) ? $clog2(WPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             kernel_start,
  input  theta_arr_t       theta,
  input  state_t           state,
  input  rate_t            epsilon,
  input  warp_status_t     warp   [WPS],
  input  logic [WPS-1:0]   launch,
  input  logic             block_sfu,
  input  logic             block_mem,
  output logic             issue_valid,
  output logic [IDX_W-1:0] issue_idx,
  output action_e          action,
  output logic             explored,
  output logic             kept_last,
  output logic             other_possible,
  output qval_t            q_c,
  output logic             hist_valid,
  output action_e          a_p,
  output qval_t            q_p,
  output logic             r_p
);
  q_arr_t             q;
  logic [NUM_ACT-1:0] possible, allowed;
  logic [WPS-1:0]     ready;
  iclass_e            iclass [WPS];
  logic [15:0]        rnd_x, rnd_a;
  logic               last_no;
  logic               sel_valid;

  always_comb begin
    possible = '0;
    for (int w = 0; w < int'(WPS); w++) begin
      ready[w]  = warp[w].instr_valid && warp[w].ready;
      iclass[w] = warp[w].iclass;
      if (ready[w]) possible[class_to_action(warp[w].iclass)] = 1'b1;
    end
    if (block_sfu) possible[ACT_SFU] = 1'b0;
    if (block_mem) begin
      possible[ACT_GMEM]   = 1'b0;
      possible[ACT_STCMEM] = 1'b0;
    end
    possible[ACT_NO_INSTR] = 1'b1;
    other_possible = |possible[NUM_ACT-1:1];
  end

  q_value_unit u_q (.theta(theta), .state(state), .q(q));

  lfsr16 #(.SEED(SEED))           u_rx (.clk(clk), .rst_n(rst_n), .en(1'b1), .rnd(rnd_x));
  lfsr16 #(.SEED(SEED ^ 16'h5A5A)) u_ra (.clk(clk), .rst_n(rst_n), .en(1'b1), .rnd(rnd_a));

  action_selector u_act (
    .q(q), .possible(possible), .last_no_instr(last_no), .epsilon(epsilon),
    .rnd(rnd_x), .rnd_act(rnd_a[2:0]),
    .action(action), .explored(explored), .allowed(allowed)
  );

  warp_selector #(.WPS(WPS)) u_ws (
    .clk(clk), .rst_n(rst_n), .launch(launch), .ready(ready), .iclass(iclass),
    .action(action), .issue(action != ACT_NO_INSTR),
    .sel_valid(sel_valid), .sel_idx(issue_idx), .sel_last(kept_last)
  );

  assign issue_valid = sel_valid && (action != ACT_NO_INSTR);
  assign q_c         = $signed(q[action]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_no <= 1'b0; hist_valid <= 1'b0;
      a_p <= ACT_NO_INSTR; q_p <= '0; r_p <= 1'b0;
    end else if (kernel_start) begin
      last_no <= 1'b0; hist_valid <= 1'b0;
      a_p <= ACT_NO_INSTR; q_p <= '0; r_p <= 1'b0;
    end else begin
      last_no    <= (action == ACT_NO_INSTR);
      hist_valid <= 1'b1;
      a_p        <= action;
      q_p        <= q_c;
      r_p        <= issue_valid;
    end
  end

  // an action other than NO_INSTR always finds a warp
  always_ff @(posedge clk)
    if (rst_n) a_issue: assert (action == ACT_NO_INSTR || sel_valid)
      else $error("rlws_scheduler: chosen action has no ready warp");
endmodule
