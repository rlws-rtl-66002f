// tb_rlws_gpu_full: one complete kernel on the full-size scheduler.
//
// rlws_gpu with its default parameters (15 SMs, 2 schedulers and 48 warps
// per SM) runs one kernel of 150 thread blocks of 8 warps (90 resident at a
// time, so both phases occur) against the behavioural GPU model.  Checks:
// no illegal issue, every instruction issued, each SM learned (weights moved
// away from their initial values) and each SM reached phase 2.
module tb_rlws_gpu_full;
  import rlws_pkg::*;
  localparam int NSM = 15, NS = 2, WPS = 24, NW = NS * WPS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic kernel_start, tb_waiting, lat_valid, l2_access, l2_miss, all_done;
  logic [9:0] lat_value;
  warp_status_t warp [NSM][NW];
  logic [NW-1:0] launch [NSM];
  logic l1_access [NSM], l1_miss [NSM];
  logic [1:0] mem_done [NSM];
  logic issue_valid [NSM][NS];
  logic [5:0] issue_warp [NSM][NS];
  action_e action [NSM][NS];
  logic explored [NSM][NS], kept_last [NSM][NS], other_possible [NSM][NS];
  logic phase2 [NSM], decay_tick [NSM];
  rate_t alpha [NSM], epsilon [NSM];
  state_t state [NSM];
  theta_arr_t theta [NSM];
  int errors, kernels_done, conflicts;
  longint issued_total, expected_total;
  int checks = 0, failures = 0;
  longint cycles = 0;

  rlws_gpu dut (
    .clk, .rst_n, .kernel_start, .tb_waiting, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .lat_valid, .lat_value, .l2_access, .l2_miss, .issue_valid,
    .issue_warp, .action, .explored, .kept_last, .other_possible, .phase2,
    .decay_tick, .alpha, .epsilon, .state, .theta);

  gpu_env_model #(.NUM_SM(NSM), .NUM_SCHED(NS), .WPS(WPS), .TB_WARPS(8),
                  .INSTRS(60), .NUM_KERNELS(1)) env (
    .kern_tb(150), .kern_res(0),
    .clk, .rst_n, .kernel_start, .tb_waiting, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .lat_valid, .lat_value, .l2_access, .l2_miss, .issue_valid,
    .issue_warp, .action, .all_done, .errors, .issued_total, .expected_total,
    .kernels_done, .conflicts);

  always @(posedge clk) if (rst_n) cycles++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (all_done);
    @(posedge clk);
    checks++;
    if (errors != 0) begin failures++; $display("FAIL: %0d illegal issues", errors); end
    checks++;
    if (issued_total != expected_total) begin
      failures++;
      $display("FAIL: issued %0d of %0d instructions", issued_total, expected_total);
    end
    for (int s = 0; s < NSM; s++) begin
      logic moved;
      moved = 1'b0;
      for (int a = 0; a < int'(NUM_ACT); a++)
        for (int i = 0; i < int'(NUM_VARS); i++)
          if ($signed(theta[s][a][i]) != THETA_INIT_DEF) moved = 1'b1;
      checks++;
      if (!moved) begin failures++; $display("FAIL: SM %0d did not learn", s); end
      checks++;
      if (!phase2[s]) begin failures++; $display("FAIL: SM %0d not in phase 2", s); end
    end
    $display("%0d instructions on %0d SMs in %0d cycles (IPC %0.2f)",
             issued_total, NSM, cycles, real'(issued_total) / real'(cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
