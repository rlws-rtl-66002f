// tb_theta_learning_unit: drives random SARSA histories for two schedulers
// and compares the weights each cycle with a reference written from the
// update rule:  delta = r + gamma*Qc - Qp,  theta[ap][i] += floor(floor(
// alpha*delta) / 2^sp[i]), saturating.  Also checks one case by hand
// (Qp = Qc = 0, reward 1: every weight of ap grows by 5898 >> sp[i]) and
// the re-initialisation on 'init'.
module tb_theta_learning_unit;
  import rlws_pkg::*;
  localparam int NS = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init;
  rate_t alpha;
  state_t sp;
  logic hv [NS], rwd [NS];
  action_e ap [NS];
  qval_t qp [NS], qc [NS];
  theta_arr_t theta;
  logic signed [31:0] delta [NS];
  longint model [NUM_ACT][NUM_VARS];

  theta_learning_unit #(.NUM_SCHED(NS)) dut (.clk, .rst_n, .init, .alpha, .sp,
    .hist_valid(hv), .ap, .qp, .rwd, .qc, .theta, .delta);

  function automatic longint fdiv(longint x, int sh);   // floor(x / 2^sh)
    return longint'($floor(real'(x) / (2.0 ** sh)));
  endfunction

  task automatic compare(string tag);
    for (int a = 0; a < int'(NUM_ACT); a++)
      for (int i = 0; i < int'(NUM_VARS); i++) begin
        checks++;
        if (longint'($signed(theta[a][i])) != model[a][i]) begin
          failures++;
          $display("FAIL %s a=%0d i=%0d got %0d exp %0d", tag, a, i, $signed(theta[a][i]), model[a][i]);
        end
      end
  endtask

  initial begin
    init = 0; alpha = ALPHA_DEF; sp = '0;
    for (int k = 0; k < NS; k++) begin hv[k] = 0; rwd[k] = 0; ap[k] = ACT_NO_INSTR; qp[k] = '0; qc[k] = '0; end
    for (int a = 0; a < int'(NUM_ACT); a++) for (int i = 0; i < int'(NUM_VARS); i++) model[a][i] = THETA_INIT_DEF;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); compare("reset");
    // hand case
    sp = {3'd7, 3'd6, 3'd5, 3'd4, 3'd3, 3'd2, 3'd1, 3'd0};
    hv[0] = 1; ap[0] = ACT_SP; rwd[0] = 1; qp[0] = '0; qc[0] = '0;
    @(negedge clk);
    for (int i = 0; i < int'(NUM_VARS); i++) model[ACT_SP][i] += (5898 >> i);
    compare("hand");
    hv[0] = 0;
    for (int n = 0; n < 3000; n++) begin
      longint step [NS];
      @(negedge clk);
      alpha = rate_t'($urandom);
      for (int i = 0; i < int'(NUM_VARS); i++) sp[i] = BKT_W'($urandom);
      for (int k = 0; k < NS; k++) begin
        hv[k]  = ($urandom_range(7) != 0);
        ap[k]  = action_e'($urandom_range(4));
        rwd[k] = 1'($urandom);
        qp[k]  = Q_W'($signed($urandom_range(60 << 16)) - (20 << 16));
        qc[k]  = Q_W'($signed($urandom_range(60 << 16)) - (20 << 16));
      end
      if (n % 500 == 0) ap[1] = ap[0];
      #1;
      for (int k = 0; k < NS; k++) begin
        longint d;
        d = (rwd[k] ? 65536 : 0) + fdiv(longint'(qc[k]) * 62259, 16) - longint'(qp[k]);
        step[k] = fdiv(d * longint'(alpha), 16);
        checks++;
        if (longint'(delta[k]) != d) begin failures++; $display("FAIL delta"); end
      end
      for (int a = 0; a < int'(NUM_ACT); a++)
        for (int i = 0; i < int'(NUM_VARS); i++) begin
          for (int k = 0; k < NS; k++)
            if (hv[k] && int'(ap[k]) == a) model[a][i] += fdiv(step[k], int'(sp[i]));
          if (model[a][i] > 8388607) model[a][i] = 8388607;
          if (model[a][i] < -8388608) model[a][i] = -8388608;
        end
      @(negedge clk);
      for (int k = 0; k < NS; k++) hv[k] = 0;
      compare("random");
    end
    init = 1;
    @(negedge clk);
    init = 0;
    for (int a = 0; a < int'(NUM_ACT); a++) for (int i = 0; i < int'(NUM_VARS); i++) model[a][i] = THETA_INIT_DEF;
    compare("init");
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
