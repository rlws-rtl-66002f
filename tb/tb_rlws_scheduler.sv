// tb_rlws_scheduler: one scheduler with an 8-warp pool, random weights,
// states, warp status and pipeline blocking.  With epsilon = 0 the action
// must be the reference greedy choice, computed here from theta and the
// state (Q = sum floor(theta / 2^s)); with epsilon = 0.5 exploration must
// happen.  Always: the issued warp is ready and matches the action, a
// blocked pipeline is never chosen, NO_INSTR is not repeated when another
// action is possible, and the history registers hold the previous action,
// its Q value and whether it issued.
module tb_rlws_scheduler;
  import rlws_pkg::*;
  localparam int W = 8;
  int checks = 0, failures = 0, n_exp = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, block_sfu, block_mem;
  theta_arr_t theta;
  state_t st;
  rate_t eps;
  warp_status_t warp [W];
  logic [W-1:0] launch;
  logic issue_valid, explored, kept_last, other_possible, hist_valid, r_p;
  logic [2:0] issue_idx;
  action_e action, a_p;
  qval_t q_c, q_p;
  action_e pa; qval_t pq; logic pi, pno;

  rlws_scheduler #(.WPS(W)) dut (.clk, .rst_n, .kernel_start, .theta, .state(st),
    .epsilon(eps), .warp, .launch, .block_sfu, .block_mem, .issue_valid, .issue_idx,
    .action, .explored, .kept_last, .other_possible, .q_c, .hist_valid, .a_p, .q_p, .r_p);

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    kernel_start = 0; block_sfu = 0; block_mem = 0; eps = 0; launch = '0; st = '0;
    for (int w = 0; w < W; w++) warp[w] = '0;
    for (int a = 0; a < 5; a++) for (int i = 0; i < 8; i++) theta[a][i] = THETA_W'(THETA_INIT_DEF);
    repeat (2) @(posedge clk);
    rst_n = 1;
    pno = 0;
    for (int n = 0; n < 6000; n++) begin
      logic [4:0] poss;
      longint q [5];
      int best; longint bq;
      @(negedge clk);
      if (n % 50 == 0)
        for (int a = 0; a < 5; a++) for (int i = 0; i < 8; i++)
          theta[a][i] = THETA_W'($signed($urandom_range(40 << 16)) - (10 << 16));
      for (int i = 0; i < 8; i++) st[i] = 3'($urandom);
      for (int w = 0; w < W; w++) begin
        warp[w].instr_valid = ($urandom_range(3) != 0);
        warp[w].ready       = ($urandom_range(2) == 0);
        warp[w].iclass      = iclass_e'($urandom_range(3));
      end
      launch    = ($urandom_range(19) == 0) ? W'($urandom) : '0;
      block_sfu = 1'($urandom);
      block_mem = ($urandom_range(3) == 0);
      eps       = (n < 3000) ? '0 : 16'h8000;
      #1;
      poss = 5'b00001;
      for (int w = 0; w < W; w++)
        if (warp[w].instr_valid && warp[w].ready) poss[int'(class_to_action(warp[w].iclass))] = 1;
      if (block_sfu) poss[ACT_SFU] = 0;
      if (block_mem) begin poss[ACT_GMEM] = 0; poss[ACT_STCMEM] = 0; end
      if (pno && poss[4:1] != 0) poss[0] = 0;
      for (int a = 0; a < 5; a++) begin
        q[a] = 0;
        for (int i = 0; i < 8; i++)
          q[a] += longint'($floor(real'($signed(theta[a][i])) / (2.0 ** st[i])));
      end
      best = -1; bq = 0;
      for (int a = 1; a < 5; a++) if (poss[a] && (best < 0 || q[a] > bq)) begin best = a; bq = q[a]; end
      if (poss[0] && (best < 0 || q[0] > bq)) best = 0;
      chk(poss[int'(action)], "action allowed");
      chk(other_possible == (poss[4:1] != 0) || pno, "other_possible");
      if (!explored) chk(int'(action) == best, "greedy choice");
      else n_exp++;
      chk(longint'(q_c) == q[int'(action)], "q of chosen action");
      chk(issue_valid == (action != ACT_NO_INSTR), "issue follows action");
      if (issue_valid)
        chk(warp[issue_idx].instr_valid && warp[issue_idx].ready &&
            class_to_action(warp[issue_idx].iclass) == action, "issued warp matches");
      if (n > 0) chk(hist_valid && a_p == pa && q_p == pq && r_p == pi, "history");
      pa = action; pq = q_c; pi = issue_valid; pno = (action == ACT_NO_INSTR);
    end
    chk(n_exp > 1000, "exploration with epsilon 0.5");
    $display("explored %0d", n_exp);
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
