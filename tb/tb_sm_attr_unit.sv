// tb_sm_attr_unit: drives random warp status and events and keeps its own
// counts: L1-D miss percentage of each 64-access window, instructions per
// miss over each 16-miss window (capped at 100), memory instructions in
// flight, and the two warp popcounts; every value and bucket is compared
// each cycle.
module tb_sm_attr_unit;
  import rlws_pkg::*;
  localparam int NW = 48;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic kernel_start, l1_access, l1_miss;
  logic [1:0] issued, mem_issued, mem_done;
  warp_status_t warp [NW];
  logic [6:0] l1mp, nipl1m, smnmie;
  logic [7:0] nfmi, nrai;
  bucket_t b_l1mp, b_nipl1m, b_smnmie, b_nfmi, b_nrai;
  int acc, miss, r_l1mp, mw, inst, r_nip, inflight;

  sm_attr_unit dut (.clk, .rst_n, .kernel_start, .warp, .l1_access, .l1_miss, .issued,
    .mem_issued, .mem_done, .l1mp, .nipl1m, .smnmie, .nfmi, .nrai, .b_l1mp, .b_nipl1m,
    .b_smnmie, .b_nfmi, .b_nrai);

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
    int t4 [7] = '{10, 30, 60, 101, 101, 101, 101};
    int t8 [7] = '{35, 54, 68, 79, 87, 93, 97};
    kernel_start = 0; l1_access = 0; l1_miss = 0; issued = 0; mem_issued = 0; mem_done = 0;
    for (int w = 0; w < NW; w++) warp[w] = '0;
    acc = 0; miss = 0; r_l1mp = 0; mw = 0; inst = 0; r_nip = 0; inflight = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int ef, er, phase;
      @(negedge clk);
      phase = (n / 1000) % 3;       // vary miss rate and issue rate
      for (int w = 0; w < NW; w++) begin
        warp[w].instr_valid = 1'($urandom);
        warp[w].ready       = 1'($urandom);
        warp[w].iclass      = iclass_e'($urandom_range(3));
      end
      l1_access  = 1'($urandom);
      l1_miss    = (phase == 2) ? 1'b0 : ($urandom_range(9) < (phase == 0 ? 2 : 8));
      issued     = 2'($urandom_range(2));
      mem_issued = (inflight < 50 && $urandom_range(1)) ? 2'd1 : 2'd0;
      mem_done   = (inflight > 0) ? 2'($urandom_range(inflight > 2 ? 2 : inflight)) : 2'd0;
      #1;
      ef = 0; er = 0;
      for (int w = 0; w < NW; w++) begin
        if (warp[w].instr_valid && (warp[w].iclass == IC_GMEM || warp[w].iclass == IC_STCMEM)) ef++;
        if (warp[w].instr_valid && warp[w].ready && (warp[w].iclass == IC_SP || warp[w].iclass == IC_SFU)) er++;
      end
      chk(int'(nfmi) == ef && int'(b_nfmi) == bk(ef, 48, t4, 4), "nfmi");
      chk(int'(nrai) == er && int'(b_nrai) == bk(er, 48, t4, 4), "nrai");
      chk(int'(l1mp) == r_l1mp && int'(b_l1mp) == bk(r_l1mp, 100, t8, 8), "l1mp");
      chk(int'(nipl1m) == ((inst >= 1600) ? 100 : r_nip) &&
          int'(b_nipl1m) == bk(int'(nipl1m), 100, t4, 4), "nipl1m");
      chk(int'(smnmie) == inflight && int'(b_smnmie) == bk(inflight, 40, t4, 4), "smnmie");
      // reference update for the coming edge
      inst += int'(issued);
      if (inst > 1600) inst = 1600;
      if (l1_access) begin
        acc++;
        miss += int'(l1_miss);
        if (acc == 64) begin r_l1mp = miss * 100 / 64; acc = 0; miss = 0; end
        if (l1_miss) begin
          mw++;
          if (mw == 16) begin r_nip = inst / 16; inst = 0; mw = 0; end
        end
      end
      inflight += int'(mem_issued) - int'(mem_done);
    end
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
