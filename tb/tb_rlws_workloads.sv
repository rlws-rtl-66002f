// tb_rlws_workloads: the full-size scheduler on the sizes of the 58 benchmark
// kernels of the evaluation, run back to back.
//
// rlws_gpu with its default parameters (15 SMs, 2 schedulers of 24 warps)
// runs one kernel after another against the behavioural GPU model.  Each
// kernel keeps its own two sizes from the benchmark table: the number of
// thread blocks in its grid and how many are resident on the GPU at once.
// The residency is turned into a per-SM limit of ceil(resident / 15) thread
// blocks, at most 8.  What the kernels execute is not known here, so every
// kernel uses the model's synthetic instruction mix, with 6 warps per thread
// block and 24 instructions per warp.  To keep the run short, a grid is cut
// to at most twice its residency.  That still fills the GPU and leaves
// blocks waiting, so both phases occur wherever the real grid has them.
// Grids that fit at once (1, 3, 10, 14 blocks, ...) run in phase 2 only.
//
// Per kernel it checks that no issue was illegal, that every instruction
// was issued, that no SM held more blocks than the limit, that every SM
// ended in phase 2, and that the weights were back at their initial value
// one cycle after the kernel started.  It prints cycles and instructions
// per cycle for each kernel.
module tb_rlws_workloads;
  import rlws_pkg::*;
  localparam int NSM = 15, NS = 2, WPS = 24, NW = NS * WPS;
  localparam int TBW = 6, SLOTS = NW / TBW;
  localparam int NK = 58;
  // thread blocks per grid and GPU residency, in table order
  localparam int KTB [NK] = '{
    257, 256, 256, 64, 64, 100, 196, 168, 1400, 2800, 280, 256, 512, 384,
    480, 18432, 9216, 4370, 64, 240, 256, 128, 256, 128, 1, 14, 121, 128,
    1584, 99, 10, 64, 201, 4096, 4096, 1954, 1954, 6000, 10000, 1212, 1212,
    1212, 1212, 1849, 1936, 1936, 1000, 1, 3, 463, 450, 450, 450, 450, 450,
    450, 16384, 16384};
  localparam int KRES [NK] = '{
    90, 90, 120, 64, 64, 100, 75, 105, 120, 120, 120, 45, 75, 75, 120, 120,
    120, 120, 64, 120, 90, 120, 90, 90, 1, 14, 120, 75, 120, 99, 10, 64, 45,
    90, 90, 36, 36, 45, 45, 120, 120, 45, 120, 60, 90, 90, 60, 1, 3, 90, 45,
    45, 45, 45, 45, 45, 90, 90};

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
  int kern_tb, kern_res, kidx;
  longint cycles = 0, k_start_cyc = 0, k_start_iss = 0;
  int over_res = 0, err_seen = 0;

  function automatic int grid_of(int k);
    return (KTB[k] < 2 * KRES[k]) ? KTB[k] : 2 * KRES[k];
  endfunction
  function automatic int res_of(int k);
    int r;
    r = (KRES[k] + NSM - 1) / NSM;
    return (r > SLOTS) ? SLOTS : r;
  endfunction

  assign kidx     = (kernels_done < NK) ? kernels_done : NK - 1;
  assign kern_tb  = grid_of(kidx);
  assign kern_res = res_of(kidx);

  rlws_gpu dut (
    .clk, .rst_n, .kernel_start, .tb_waiting, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .lat_valid, .lat_value, .l2_access, .l2_miss, .issue_valid,
    .issue_warp, .action, .explored, .kept_last, .other_possible, .phase2,
    .decay_tick, .alpha, .epsilon, .state, .theta);

  gpu_env_model #(.NUM_SM(NSM), .NUM_SCHED(NS), .WPS(WPS), .TB_WARPS(TBW),
                  .INSTRS(24), .NUM_KERNELS(NK)) env (
    .kern_tb, .kern_res,
    .clk, .rst_n, .kernel_start, .tb_waiting, .warp, .launch, .l1_access, .l1_miss,
    .mem_done, .lat_valid, .lat_value, .l2_access, .l2_miss, .issue_valid,
    .issue_warp, .action, .all_done, .errors, .issued_total, .expected_total,
    .kernels_done, .conflicts);

  // residency: count the blocks each SM holds (a block is resident while
  // its first warp slot is active)
  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int s = 0; s < NSM; s++) begin
      int n;
      n = 0;
      for (int g = 0; g < SLOTS; g++) if (env.active[s][g*TBW]) n++;
      if (n > kern_res) over_res++;
    end
  end

  // weights are back at their initial value right after each kernel start
  always @(posedge clk) if (rst_n && kernel_start) begin
    @(negedge clk);
    for (int s = 0; s < NSM; s++) begin
      logic fresh;
      fresh = 1'b1;
      for (int a = 0; a < int'(NUM_ACT); a++)
        for (int i = 0; i < int'(NUM_VARS); i++)
          if ($signed(theta[s][a][i]) != 24'(THETA_INIT_DEF)) fresh = 1'b0;
      checks++;
      if (!fresh) begin failures++; $display("FAIL: kernel %0d SM %0d weights not reset", kidx, s); end
    end
    k_start_cyc = cycles;
    k_start_iss = issued_total;
  end

  // end of each kernel
  always @(posedge clk) if (rst_n) begin
    int prev;
    prev = kernels_done;
    @(negedge clk);
    if (kernels_done != prev) begin
      checks++;
      if (errors != err_seen) begin
        failures++;
        $display("FAIL: kernel %0d: %0d illegal issues", prev, errors - err_seen);
        err_seen = errors;
      end
      checks++;
      if (issued_total != expected_total) begin
        failures++;
        $display("FAIL: kernel %0d: issued %0d of %0d", prev, issued_total, expected_total);
      end
      checks++;
      if (over_res != 0) begin
        failures++;
        $display("FAIL: kernel %0d: residency limit exceeded %0d times", prev, over_res);
        over_res = 0;
      end
      for (int s = 0; s < NSM; s++) begin
        checks++;
        if (!phase2[s]) begin failures++; $display("FAIL: kernel %0d SM %0d not in phase 2", prev, s); end
      end
      $display("kernel %2d: %5d blocks, %0d per SM: %0d instructions in %0d cycles (IPC %0.2f)",
               prev, grid_of(prev), res_of(prev), issued_total - k_start_iss,
               cycles - k_start_cyc,
               real'(issued_total - k_start_iss) / real'(cycles - k_start_cyc));
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (all_done);
    repeat (2) @(posedge clk);
    checks++;
    if (kernels_done != NK) begin failures++; $display("FAIL: %0d of %0d kernels ran", kernels_done, NK); end
    $display("%0d instructions of %0d kernels in %0d cycles", issued_total, NK, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
