// tb_warp_selector: random launches, ready sets, classes and actions on an
// 8-slot pool.  A reference keeps the launch order of the slots as a list
// and the last issued warp, and gives the expected warp: the last one if it
// is a candidate, else the candidate that appears first in the list.
module tb_warp_selector;
  import rlws_pkg::*;
  localparam int W = 8;
  int checks = 0, failures = 0, n_kept = 0, n_old = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] launch, ready;
  iclass_e iclass [W];
  action_e action;
  logic issue, sel_valid, sel_last;
  logic [2:0] sel_idx;
  int order [$];
  int last_w;

  warp_selector #(.WPS(W)) dut (.clk, .rst_n, .launch, .ready, .iclass, .action,
    .issue, .sel_valid, .sel_idx, .sel_last);

  initial begin
    launch = '0; ready = '0; action = ACT_NO_INSTR; issue = 0;
    for (int i = 0; i < W; i++) begin iclass[i] = IC_SP; order.push_back(i); end
    last_w = -1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int exp_w;
      logic [W-1:0] cand;
      @(negedge clk);
      launch = ($urandom_range(9) == 0) ? W'($urandom) : '0;
      ready  = W'($urandom) | W'($urandom);
      for (int i = 0; i < W; i++) iclass[i] = iclass_e'($urandom_range(3));
      action = action_e'($urandom_range(4));
      issue  = (action != ACT_NO_INSTR);
      #1;
      for (int i = 0; i < W; i++) cand[i] = ready[i] && issue && class_to_action(iclass[i]) == action;
      exp_w = -1;
      if (last_w >= 0 && cand[last_w]) exp_w = last_w;
      else foreach (order[k]) if (exp_w < 0 && cand[order[k]]) exp_w = order[k];
      checks++;
      if (sel_valid != (cand != 0) || (exp_w >= 0 && int'(sel_idx) != exp_w) ||
          (exp_w >= 0 && sel_last != (exp_w == last_w))) begin
        failures++;
        $display("FAIL n=%0d got %0d expected %0d", n, sel_idx, exp_w);
      end
      if (exp_w >= 0 && exp_w == last_w) n_kept++;
      if (exp_w >= 0 && exp_w != last_w) n_old++;
      last_w = (issue && cand != 0) ? int'(sel_idx) : -1;
      // launched slots move to the young end, lower index first
      for (int i = 0; i < W; i++)
        if (launch[i]) begin
          foreach (order[k]) if (order[k] == i) begin order.delete(k); break; end
        end
      for (int i = 0; i < W; i++) if (launch[i]) order.push_back(i);
    end
    checks++;
    if (n_kept == 0 || n_old == 0) failures++;
    $display("kept %0d oldest %0d", n_kept, n_old);
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
