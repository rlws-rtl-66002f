// tb_rlws_sm: one SM with two schedulers of 8 warps under random warp
// status and events.  Checks every cycle: each issued warp belongs to its
// scheduler, is ready and matches the action; at most one SFU and one
// memory instruction per cycle for the SM; the state register holds last
// cycle's GPU buckets and warp-count buckets; and the shared weights follow
// a reference SARSA update computed here from the observed state, actions,
// rates and weights (Q recomputed as sum floor(theta / 2^s)).  A kernel
// start must restore the initial weights.
module tb_rlws_sm;
  import rlws_pkg::*;
  localparam int NS = 2, W = 8, NW = NS * W;
  int checks = 0, failures = 0, n_block = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, tb_waiting, l1_access, l1_miss;
  bucket_t b_agml, b_gnmie, b_l2mp;
  warp_status_t warp [NW];
  logic [NW-1:0] launch;
  logic [1:0] mem_done, mem_issued;
  logic issue_valid [NS], explored [NS], kept_last [NS], other_possible [NS];
  logic [3:0] issue_warp [NS];
  action_e action [NS];
  logic phase2, decay_tick;
  rate_t alpha, epsilon;
  state_t state;
  theta_arr_t theta;

  rlws_sm #(.NUM_SCHED(NS), .WPS(W), .DECAY_PERIOD(32)) dut (.clk, .rst_n, .kernel_start,
    .tb_waiting, .b_agml, .b_gnmie, .b_l2mp, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .issue_valid, .issue_warp, .action, .explored, .kept_last, .other_possible,
    .mem_issued, .phase2, .decay_tick, .alpha, .epsilon, .state, .theta);

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic longint qv(theta_arr_t t, state_t s, int a);
    longint q; q = 0;
    for (int i = 0; i < 8; i++) q += longint'($floor(real'($signed(t[a][i])) / (2.0 ** s[i])));
    return q;
  endfunction

  function automatic longint fl(real x); return longint'($floor(x)); endfunction

  initial begin
    state_t s_prev, exp_state, cur_state;
    int cur_a [NS]; logic cur_i [NS];
    logic hv; int ap [NS]; longint qp [NS]; logic rp [NS];
    int t4 [4] = '{10, 30, 60, 101};
    kernel_start = 0; tb_waiting = 1; l1_access = 0; l1_miss = 0; mem_done = 0; launch = '0;
    b_agml = 0; b_gnmie = 0; b_l2mp = 0;
    for (int w = 0; w < NW; w++) warp[w] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); kernel_start = 1;
    @(negedge clk); kernel_start = 0;
    hv = 0; s_prev = state; exp_state = state;
    for (int n = 0; n < 4000; n++) begin
      int nmem, nsfu, ef, er;
      theta_arr_t exp_theta;
      longint qc [NS];
      @(negedge clk);
      // state register = buckets of the previous cycle's inputs
      if (n > 0) chk(state == exp_state, "state register");
      cur_state = state;
      for (int w = 0; w < NW; w++) begin
        warp[w].instr_valid = ($urandom_range(3) != 0);
        warp[w].ready       = 1'($urandom);
        warp[w].iclass      = iclass_e'($urandom_range(3));
      end
      b_agml = 3'($urandom_range(1)); b_gnmie = 3'($urandom); b_l2mp = 3'($urandom_range(1));
      launch = ($urandom_range(29) == 0) ? NW'($urandom) : '0;
      l1_access = 1'($urandom); l1_miss = 1'($urandom);
      mem_done = 2'($urandom_range(1));
      tb_waiting = (n < 2500);
      #1;
      nmem = 0; nsfu = 0;
      for (int k = 0; k < NS; k++) begin
        if (issue_valid[k]) begin
          int w; w = int'(issue_warp[k]);
          chk(w % NS == k && warp[w].instr_valid && warp[w].ready &&
              class_to_action(warp[w].iclass) == action[k], "issued warp legal");
        end
        if (action[k] == ACT_SFU) nsfu++;
        if (action[k] == ACT_GMEM || action[k] == ACT_STCMEM) nmem++;
        qc[k] = qv(theta, state, int'(action[k]));
      end
      if (action[0] == ACT_SFU || action[0] == ACT_GMEM || action[0] == ACT_STCMEM) begin
        for (int w = 1; w < NW; w += NS)
          if (warp[w].instr_valid && warp[w].ready && class_to_action(warp[w].iclass) == action[0]) begin
            n_block++; break;
          end
      end
      chk(nmem <= 1 && nsfu <= 1, "one SFU and one MEM per SM");
      // reference weight update for this edge
      exp_theta = theta;
      if (hv) begin
        for (int k = 0; k < NS; k++) begin
          longint d, st;
          d  = (rp[k] ? 65536 : 0) + fl(real'(qc[k]) * 62259.0 / 65536.0) - qp[k];
          st = fl(real'(d) * real'(alpha) / 65536.0);
          for (int i = 0; i < 8; i++) begin
            longint v;
            v = longint'($signed(exp_theta[ap[k]][i])) + fl(real'(st) / (2.0 ** s_prev[i]));
            exp_theta[ap[k]][i] = THETA_W'(v);
          end
        end
      end
      // expected next state
      ef = 0; er = 0;
      for (int w = 0; w < NW; w++) begin
        if (warp[w].instr_valid && (warp[w].iclass == IC_GMEM || warp[w].iclass == IC_STCMEM)) ef++;
        if (warp[w].instr_valid && warp[w].ready && (warp[w].iclass == IC_SP || warp[w].iclass == IC_SFU)) er++;
      end
      exp_state = state;
      exp_state[V_AGML] = b_agml; exp_state[V_GNMIE] = b_gnmie; exp_state[V_L2MP] = b_l2mp;
      begin
        int b1, b2; b1 = 0; b2 = 0;
        for (int i = 0; i < 3; i++) begin
          if (ef * 100 >= t4[i] * NW) b1++;
          if (er * 100 >= t4[i] * NW) b2++;
        end
        exp_state[V_NFMI] = 3'(b1); exp_state[V_NRAI] = 3'(b2);
      end
      for (int k = 0; k < NS; k++) begin cur_a[k] = int'(action[k]); cur_i[k] = issue_valid[k]; end
      // the SM-local windowed variables are checked in their own test
      @(posedge clk); #1;
      exp_state[V_L1MP] = state[V_L1MP]; exp_state[V_NIPL1M] = state[V_NIPL1M];
      exp_state[V_SMNMIE] = state[V_SMNMIE];
      if (n > 0) chk(theta == exp_theta, "weight update");
      s_prev = cur_state;
      hv = 1;
      for (int k = 0; k < NS; k++) begin ap[k] = cur_a[k]; qp[k] = qc[k]; rp[k] = cur_i[k]; end
    end
    chk(n_block > 0, "shared pipeline blocked at least once");
    @(negedge clk); kernel_start = 1;
    @(negedge clk); kernel_start = 0;
    for (int a = 0; a < 5; a++) for (int i = 0; i < 8; i++)
      chk($signed(theta[a][i]) == THETA_INIT_DEF, "weights restart");
    $display("blocked %0d", n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
