// rlws_sm: the reinforcement-learning warp scheduling logic of one SM.
//
// An SM has NUM_SCHED warp schedulers; warp w belongs to scheduler
// w % NUM_SCHED (slot w / NUM_SCHED of its pool).  All schedulers of the SM
// share one state register and one weight vector theta:
//   - sm_attr_unit measures the SM-local state variables; together with the
//     GPU-wide buckets they are registered each cycle as the current state
//     s_c (and the previous one, s_p, for the update);
//   - each rlws_scheduler chooses an action and a warp;
//   - the SFU pipeline and the MEM pipeline take one instruction per cycle
//     per SM, so scheduler k may not pick SFU (MEM) when a lower-numbered
//     scheduler picked SFU (MEM) in the same cycle;
//   - theta_learning_unit applies the SARSA updates of all schedulers;
//   - rate_controller provides learning and exploration rates.
//
// Timing: the state register lags the warp status by one cycle; choices and
// issue are combinational within a cycle; theta, history and rates change on
// the clock edge.  'kernel_start' (one cycle) restarts learning.
//
// Shared phi and theta for the two schedulers, two schedulers per SM, one
// MEM and one SFU issue per SM and cycle, and 24 warps per scheduler follow
// the paper; the fixed priority among schedulers for the shared pipelines,
// the even/odd warp split and the one-cycle state lag are this design's.
module rlws_sm
  import rlws_pkg::*;
#(
  parameter int unsigned NUM_SCHED    = 2,
  parameter int unsigned WPS          = 24,
  parameter int unsigned SM_ID        = 0,
  parameter int unsigned DECAY_PERIOD = 1024,
  localparam int unsigned NUM_WARPS   = NUM_SCHED * WPS,
  localparam int unsigned IDX_W       = (WPS > 1) ? $clog2(WPS) : 1,
  localparam int unsigned WID_W       = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             kernel_start,
  input  logic             tb_waiting,
  input  bucket_t          b_agml,
  input  bucket_t          b_gnmie,
  input  bucket_t          b_l2mp,
  input  warp_status_t     warp   [NUM_WARPS],
  input  logic [NUM_WARPS-1:0] launch,
  input  logic             l1_access,
  input  logic             l1_miss,
  input  logic [1:0]       mem_done,
  output logic             issue_valid [NUM_SCHED],
  output logic [WID_W-1:0] issue_warp  [NUM_SCHED],
  output action_e          action      [NUM_SCHED],
  output logic             explored    [NUM_SCHED],
  output logic             kept_last   [NUM_SCHED],
  output logic             other_possible [NUM_SCHED],
  output logic [1:0]       mem_issued,
  output logic             phase2,
  output logic             decay_tick,
  output rate_t            alpha,
  output rate_t            epsilon,
  output state_t           state,
  output theta_arr_t       theta
);
  state_t        s_p;
  warp_status_t  pool   [NUM_SCHED][WPS];
  logic [WPS-1:0] pool_launch [NUM_SCHED];
  logic [IDX_W-1:0] idx [NUM_SCHED];
  logic          blk_sfu [NUM_SCHED];
  logic          blk_mem [NUM_SCHED];
  logic          hv  [NUM_SCHED];
  action_e       ap  [NUM_SCHED];
  qval_t         qp  [NUM_SCHED];
  logic          rp  [NUM_SCHED];
  qval_t         qc  [NUM_SCHED];
  logic signed [31:0] delta [NUM_SCHED];
  logic [1:0]    issued_cnt;
  bucket_t       b_l1mp, b_nipl1m, b_smnmie, b_nfmi, b_nrai;
  logic [6:0]    l1mp, nipl1m, smnmie;
  logic [7:0]    nfmi, nrai;

  // ---------------- warp pools --------------------------------------------
  always_comb begin
    for (int k = 0; k < int'(NUM_SCHED); k++)
      for (int j = 0; j < int'(WPS); j++) begin
        pool[k][j]        = warp[j * NUM_SCHED + k];
        pool_launch[k][j] = launch[j * NUM_SCHED + k];
      end
  end

  // ---------------- shared pipelines: fixed priority -----------------------
  // Each generate block k passes on whether schedulers 0..k took the SFU or
  // the MEM pipeline; scheduler k is blocked by what 0..k-1 took.
  for (genvar k = 0; k < NUM_SCHED; k++) begin : g_sched
    action_e act_k;
    logic    sfu_taken, mem_taken;   // by schedulers 0..k
    if (k == 0) begin : g_first
      assign blk_sfu[k] = 1'b0;
      assign blk_mem[k] = 1'b0;
    end else begin : g_next
      assign blk_sfu[k] = g_sched[k-1].sfu_taken;
      assign blk_mem[k] = g_sched[k-1].mem_taken;
    end
    assign sfu_taken = blk_sfu[k] || (act_k == ACT_SFU);
    assign mem_taken = blk_mem[k] || (act_k == ACT_GMEM) || (act_k == ACT_STCMEM);
    assign action[k] = act_k;
    rlws_scheduler #(.WPS(WPS), .SEED(16'(16'hACE1 + 16'h1F3 * (SM_ID * NUM_SCHED + k + 1))))
    u_sched (
      .clk(clk), .rst_n(rst_n), .kernel_start(kernel_start),
      .theta(theta), .state(state), .epsilon(epsilon),
      .warp(pool[k]), .launch(pool_launch[k]),
      .block_sfu(blk_sfu[k]), .block_mem(blk_mem[k]),
      .issue_valid(issue_valid[k]), .issue_idx(idx[k]), .action(act_k),
      .explored(explored[k]), .kept_last(kept_last[k]),
      .other_possible(other_possible[k]), .q_c(qc[k]),
      .hist_valid(hv[k]), .a_p(ap[k]), .q_p(qp[k]), .r_p(rp[k])
    );
    assign issue_warp[k] = WID_W'(int'(idx[k]) * NUM_SCHED + k);
  end

  always_comb begin
    issued_cnt = '0;
    mem_issued = '0;
    for (int k = 0; k < int'(NUM_SCHED); k++) begin
      if (issue_valid[k]) issued_cnt = issued_cnt + 2'd1;
      if (issue_valid[k] && (action[k] == ACT_GMEM || action[k] == ACT_STCMEM))
        mem_issued = mem_issued + 2'd1;
    end
  end

  // ---------------- state ----------------------------------------------------
  sm_attr_unit #(.NUM_WARPS(NUM_WARPS)) u_attr (
    .clk(clk), .rst_n(rst_n), .kernel_start(kernel_start), .warp(warp),
    .l1_access(l1_access), .l1_miss(l1_miss), .issued(issued_cnt),
    .mem_issued(mem_issued), .mem_done(mem_done),
    .l1mp(l1mp), .nipl1m(nipl1m), .smnmie(smnmie), .nfmi(nfmi), .nrai(nrai),
    .b_l1mp(b_l1mp), .b_nipl1m(b_nipl1m), .b_smnmie(b_smnmie),
    .b_nfmi(b_nfmi), .b_nrai(b_nrai)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      s_p   <= '0;
    end else begin
      state[V_AGML]   <= b_agml;
      state[V_GNMIE]  <= b_gnmie;
      state[V_L1MP]   <= b_l1mp;
      state[V_L2MP]   <= b_l2mp;
      state[V_NFMI]   <= b_nfmi;
      state[V_NIPL1M] <= b_nipl1m;
      state[V_NRAI]   <= b_nrai;
      state[V_SMNMIE] <= b_smnmie;
      s_p             <= state;
    end
  end

  // ---------------- learning -----------------------------------------------
  rate_controller #(.DECAY_PERIOD(DECAY_PERIOD)) u_rate (
    .clk(clk), .rst_n(rst_n), .kernel_start(kernel_start), .tb_waiting(tb_waiting),
    .alpha(alpha), .epsilon(epsilon), .phase2(phase2), .decay_tick(decay_tick)
  );

  theta_learning_unit #(.NUM_SCHED(NUM_SCHED)) u_learn (
    .clk(clk), .rst_n(rst_n), .init(kernel_start), .alpha(alpha), .sp(s_p),
    .hist_valid(hv), .ap(ap), .qp(qp), .rwd(rp), .qc(qc),
    .theta(theta), .delta(delta)
  );

  // one SFU and one memory instruction per SM and cycle
  always_ff @(posedge clk)
    if (rst_n) a_one_mem: assert (mem_issued <= 2'd1)
      else $error("rlws_sm: two memory instructions issued in one cycle");
endmodule
