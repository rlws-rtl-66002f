// tb_rlws_gpu: end-to-end test of the RL warp scheduler on a small GPU.
//
// Two SMs (two schedulers, 48 warps each) run two kernels of 24 thread
// blocks of 8 warps against the behavioural GPU model, which checks every
// issued warp.  The decay period is shortened to 64 cycles so that rate
// decay happens within the run.  The test counts how often each mechanism
// of the scheduler happened and fails if one never did: exploration,
// exploitation, a voluntary NO_INSTR, a forced stall, keeping the previous
// warp, taking the oldest warp, a blocked shared pipeline, a rate-decay
// step, the switch to phase 2, a weight update and the fresh start of the
// weights at the second kernel.  It also checks that NO_INSTR is never
// chosen twice in a row while another action was possible, that rates are
// back at their initial values in phase 2, and that all instructions issue.
module tb_rlws_gpu;
  import rlws_pkg::*;
  localparam int NSM = 2, NS = 2, WPS = 24, NW = NS * WPS;

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

  rlws_gpu #(.NUM_SM(NSM), .DECAY_PERIOD(64)) dut (
    .clk, .rst_n, .kernel_start, .tb_waiting, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .lat_valid, .lat_value, .l2_access, .l2_miss, .issue_valid,
    .issue_warp, .action, .explored, .kept_last, .other_possible, .phase2,
    .decay_tick, .alpha, .epsilon, .state, .theta);

  gpu_env_model #(.NUM_SM(NSM), .NUM_SCHED(NS), .WPS(WPS), .TB_WARPS(8),
                  .INSTRS(40), .NUM_KERNELS(2)) env (
    .kern_tb(24), .kern_res(0),
    .clk, .rst_n, .kernel_start, .tb_waiting, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .lat_valid, .lat_value, .l2_access, .l2_miss, .issue_valid,
    .issue_warp, .action, .all_done, .errors, .issued_total, .expected_total,
    .kernels_done, .conflicts);

  int checks = 0, failures = 0;
  int n_explore = 0, n_exploit = 0, n_vol_no = 0, n_forced = 0, n_kept = 0,
      n_oldest = 0, n_decay = 0, n_phase2 = 0, n_update = 0, n_fresh = 0,
      n_state_change = 0;
  logic prev_no [NSM][NS];
  logic prev_phase2 [NSM];
  state_t prev_state [NSM];

  function automatic logic theta_is_init(theta_arr_t t);
    for (int a = 0; a < int'(NUM_ACT); a++)
      for (int i = 0; i < int'(NUM_VARS); i++)
        if ($signed(t[a][i]) != THETA_INIT_DEF) return 1'b0;
    return 1'b1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NSM; s++) begin
      for (int k = 0; k < NS; k++) begin
        if (!kernel_start) begin
          if (explored[s][k]) n_explore++; else n_exploit++;
          if (action[s][k] == ACT_NO_INSTR && other_possible[s][k]) n_vol_no++;
          if (action[s][k] == ACT_NO_INSTR && !other_possible[s][k]) n_forced++;
          if (issue_valid[s][k] && kept_last[s][k]) n_kept++;
          if (issue_valid[s][k] && !kept_last[s][k]) n_oldest++;
          checks++;
          if (prev_no[s][k] && action[s][k] == ACT_NO_INSTR && other_possible[s][k]) begin
            failures++;
            $display("FAIL: NO_INSTR repeated with another action possible (sm %0d sched %0d)", s, k);
          end
          checks++;
          if ((action[s][k] == ACT_NO_INSTR) == issue_valid[s][k]) begin
            failures++;
            $display("FAIL: issue_valid does not follow the action");
          end
        end
        prev_no[s][k] = (action[s][k] == ACT_NO_INSTR);
      end
      if (decay_tick[s]) n_decay++;
      if (phase2[s] && !prev_phase2[s]) n_phase2++;
      if (phase2[s]) begin
        checks++;
        if (alpha[s] != ALPHA_DEF || epsilon[s] != EPS_DEF) begin
          failures++;
          $display("FAIL: rates not at initial values in phase 2");
        end
      end
      if (!theta_is_init(theta[s])) n_update++;
      if (state[s] != prev_state[s]) n_state_change++;
      prev_state[s] = state[s];
      prev_phase2[s] = phase2[s];
    end
  end

  // fresh start: one cycle after the second kernel_start the weights are
  // back at their initial value after having been trained
  logic ks_d;
  always @(posedge clk) begin
    ks_d <= kernel_start;
    if (rst_n && ks_d && kernels_done == 1) begin
      checks++;
      n_fresh++;
      for (int s = 0; s < NSM; s++)
        if (!theta_is_init(theta[s])) begin
          failures++;
          $display("FAIL: weights not re-initialised at kernel start");
        end
    end
  end

  task automatic need(string name, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never happened: %s", name);
    end else $display("  %-28s %0d", name, n);
  endtask

  initial begin
    for (int s = 0; s < NSM; s++) begin
      prev_phase2[s] = 1'b0; prev_state[s] = '0;
      for (int k = 0; k < NS; k++) prev_no[s][k] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (all_done);
    @(posedge clk);
    checks++;
    if (errors != 0) begin
      failures++;
      $display("FAIL: environment saw %0d illegal issues", errors);
    end
    checks++;
    if (issued_total != expected_total) begin
      failures++;
      $display("FAIL: issued %0d instructions, expected %0d", issued_total, expected_total);
    end
    $display("issued %0d instructions in %0d kernels", issued_total, kernels_done);
    need("exploration", n_explore);
    need("exploitation", n_exploit);
    need("voluntary NO_INSTR", n_vol_no);
    need("forced stall", n_forced);
    need("previous warp kept", n_kept);
    need("oldest warp taken", n_oldest);
    need("shared pipeline blocked", conflicts);
    need("rate decay step", n_decay);
    need("switch to phase 2", n_phase2);
    need("weight update", n_update);
    need("fresh start at new kernel", n_fresh);
    need("state change", n_state_change);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
