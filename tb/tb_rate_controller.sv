// tb_rate_controller: with a 16-cycle decay period, checks that in phase 1
// both rates lose 1/16 of their value every 16 cycles (counted in cycles
// between decay pulses) down to their floors, that they return to 0.09 and
// 0.04 at once when no thread block is waiting any more and stay there, and
// that a new kernel restarts phase 1.
module tb_rate_controller;
  import rlws_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, tb_waiting, phase2, decay_tick;
  rate_t alpha, epsilon;
  int ea, ee, last_tick, cyc;

  rate_controller #(.DECAY_PERIOD(16)) dut (.clk, .rst_n, .kernel_start, .tb_waiting,
    .alpha, .epsilon, .phase2, .decay_tick);

  always @(posedge clk) cyc++;

  task automatic chk(logic c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (alpha %0d eps %0d)", msg, alpha, epsilon); end
  endtask

  initial begin
    cyc = 0;
    kernel_start = 0; tb_waiting = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); kernel_start = 1; tb_waiting = 1;
    @(negedge clk); kernel_start = 0;
    chk(alpha == 16'd5898 && epsilon == 16'd2621 && !phase2, "kernel start");
    ea = 5898; ee = 2621; last_tick = -1;
    for (int n = 0; n < 16 * 40; n++) begin
      @(negedge clk);
      if (decay_tick) begin
        if (last_tick >= 0) chk(cyc - last_tick == 16, "decay period");
        last_tick = cyc;
        @(negedge clk);
        ea = ea - (ea >> 4); if (ea < 5898 / 4) ea = 5898 / 4;
        ee = ee - (ee >> 4); if (ee < 2621 / 4) ee = 2621 / 4;
        chk(int'(alpha) == ea && int'(epsilon) == ee, "decay value");
      end
    end
    chk(int'(alpha) == 5898 / 4, "alpha floor");
    tb_waiting = 0;
    @(negedge clk);
    @(negedge clk);
    chk(phase2 && alpha == ALPHA_DEF && epsilon == EPS_DEF, "phase 2 rates");
    repeat (100) begin @(negedge clk); chk(!decay_tick && alpha == ALPHA_DEF, "phase 2 hold"); end
    tb_waiting = 1;   // blocks never wait again within a kernel: phase 2 holds
    repeat (40) @(negedge clk);
    chk(phase2 && alpha == ALPHA_DEF, "phase 2 latched");
    kernel_start = 1;
    @(negedge clk); kernel_start = 0;
    chk(!phase2, "new kernel phase 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
