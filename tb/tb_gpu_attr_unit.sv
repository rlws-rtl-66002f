// tb_gpu_attr_unit: three SMs report memory issues and completions, the
// memory system reports latency samples and L2 events; the test keeps its
// own in-flight count, moving average (in real arithmetic, floored) and L2
// miss percentage per 128-access window and compares values and buckets.
module tb_gpu_attr_unit;
  import rlws_pkg::*;
  localparam int NSM = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, lat_valid, l2_access, l2_miss;
  logic [9:0] lat_value, gnmie, agml;
  logic [6:0] l2mp;
  logic [1:0] iss [NSM], dn [NSM];
  bucket_t b_gnmie, b_agml, b_l2mp;
  int inflight, acc, miss, r_l2mp, maxin = 0;
  real avg8;

  gpu_attr_unit #(.NUM_SM(NSM)) dut (.clk, .rst_n, .kernel_start, .sm_mem_issued(iss),
    .sm_mem_done(dn), .lat_valid, .lat_value, .l2_access, .l2_miss, .gnmie, .agml,
    .l2mp, .b_gnmie, .b_agml, .b_l2mp);

  function automatic int bk(int v, int maxv, int th [7], int nb);
    int b; b = 0;
    for (int i = 0; i < nb - 1; i++) if (v * 100 >= th[i] * maxv) b++;
    return b;
  endfunction

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int t2 [7] = '{50, 101, 101, 101, 101, 101, 101};
    int t8 [7] = '{3, 7, 13, 21, 32, 46, 65};
    kernel_start = 0; lat_valid = 0; lat_value = 0; l2_access = 0; l2_miss = 0;
    for (int s = 0; s < NSM; s++) begin iss[s] = 0; dn[s] = 0; end
    inflight = 0; acc = 0; miss = 0; r_l2mp = 0; avg8 = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      @(negedge clk);
      for (int s = 0; s < NSM; s++) begin
        iss[s] = (n < 4000) ? 2'($urandom_range(2)) : 2'($urandom_range(1));
        dn[s]  = (inflight > 6) ? 2'($urandom_range(1) + (n >= 4000 ? 1 : 0)) : 2'd0;
      end
      lat_valid = 1'($urandom);
      lat_value = (n < 3000) ? 10'($urandom_range(100, 300)) : 10'($urandom_range(400, 900));
      l2_access = 1'($urandom);
      l2_miss   = ($urandom_range(9) < ((n / 2000) % 2 ? 8 : 3));
      #1;
      chk(int'(gnmie) == inflight && int'(b_gnmie) == bk(inflight, 600, t8, 8), "gnmie");
      chk(int'(agml) == int'($floor(avg8 / 8.0)) && int'(b_agml) == bk(int'(agml), 800, t2, 2), "agml");
      chk(int'(l2mp) == r_l2mp && int'(b_l2mp) == bk(r_l2mp, 100, t2, 2), "l2mp");
      for (int s = 0; s < NSM; s++) inflight += int'(iss[s]) - int'(dn[s]);
      if (inflight > 1023) inflight = 1023;
      if (inflight > maxin) maxin = inflight;
      if (lat_valid) avg8 = avg8 + $floor((real'(lat_value) * 8.0 - avg8) / 8.0);
      if (l2_access) begin
        acc++; miss += int'(l2_miss);
        if (acc == 128) begin r_l2mp = miss * 100 / 128; acc = 0; miss = 0; end
      end
    end
    chk(maxin > 100, "in-flight count reached higher buckets");
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
