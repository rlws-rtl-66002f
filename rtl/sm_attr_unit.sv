// sm_attr_unit: the SM-specific state variables of the scheduler.
//
// Computes, for one SM, the five SM-local variables of the chosen state and
// maps each onto its bucket:
//   L1MP   L1-D miss percentage, measured over windows of 2^L1_WIN_LOG2
//          L1-D accesses (misses*100 >> L1_WIN_LOG2 at the end of a window);
//   NIPL1M instructions issued per L1-D miss, measured over windows of
//          2^MISS_WIN_LOG2 misses (issued >> MISS_WIN_LOG2), capped at 100;
//          it reads 100 as soon as the running count reaches that, so a
//          phase with no misses is seen as such;
//   SMNMIE memory instructions issued on the SM and not yet completed
//          (up/down counter, saturating);
//   NFMI   warps whose next instruction is a memory instruction (popcount);
//   NRAI   warps with a ready ALU (SP or SFU) instruction (popcount).
// Bucket counts (8, 4, 4, 4, 4) are those the paper's search chose.
//
// Interface: per-warp status, L1-D access/miss strobes, instructions issued
// this cycle, memory instructions issued/completed this cycle.  Windowed
// values are registers updated at the end of a window; the two popcounts and
// the buckets are combinational from the current inputs and registers.
// 'kernel_start' clears the windows and counters.
//
// The variables and their meaning are the paper's; the window lengths and
// the thresholds of the buckets are this design's choices.
module sm_attr_unit
  import rlws_pkg::*;
#(
  parameter int unsigned NUM_WARPS     = 48,
  parameter int unsigned ISSUE_W       = 2,   // width of issued-instruction count
  parameter int unsigned L1_WIN_LOG2   = 6,
  parameter int unsigned MISS_WIN_LOG2 = 4,
  parameter int unsigned SMNMIE_MAX    = 40
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                kernel_start,
  input  warp_status_t        warp [NUM_WARPS],
  input  logic                l1_access,
  input  logic                l1_miss,
  input  logic [ISSUE_W-1:0]  issued,      // instructions issued this cycle
  input  logic [ISSUE_W-1:0]  mem_issued,  // memory instructions issued
  input  logic [ISSUE_W-1:0]  mem_done,    // memory instructions completed
  output logic [6:0]          l1mp,
  output logic [6:0]          nipl1m,
  output logic [6:0]          smnmie,
  output logic [7:0]          nfmi,
  output logic [7:0]          nrai,
  output bucket_t             b_l1mp,
  output bucket_t             b_nipl1m,
  output bucket_t             b_smnmie,
  output bucket_t             b_nfmi,
  output bucket_t             b_nrai
);
  localparam int unsigned INST_W = MISS_WIN_LOG2 + 8;
  localparam logic [INST_W-1:0] INST_CAP = INST_W'(100) << MISS_WIN_LOG2;

  logic [L1_WIN_LOG2-1:0]   acc_cnt;
  logic [L1_WIN_LOG2:0]     miss_cnt;
  logic [MISS_WIN_LOG2-1:0] mwin_cnt;
  logic [INST_W-1:0]        inst_cnt;
  logic [6:0]               nipl1m_win;
  logic [6:0]               smnmie_cnt;

  // ---------------- popcounts ----------------------------------------------
  always_comb begin
    nfmi = '0;
    nrai = '0;
    for (int w = 0; w < int'(NUM_WARPS); w++) begin
      if (warp[w].instr_valid &&
          (warp[w].iclass == IC_GMEM || warp[w].iclass == IC_STCMEM))
        nfmi = nfmi + 8'd1;
      if (warp[w].instr_valid && warp[w].ready &&
          (warp[w].iclass == IC_SP || warp[w].iclass == IC_SFU))
        nrai = nrai + 8'd1;
    end
  end

  // ---------------- windowed measurements ----------------------------------
  logic [INST_W:0] ni;          // running instruction count, capped
  logic [6:0]      smnmie_nxt;

  always_comb begin
    int n;
    ni = (INST_W+1)'(inst_cnt) + (INST_W+1)'(issued);
    if (ni > (INST_W+1)'(INST_CAP)) ni = (INST_W+1)'(INST_CAP);
    n = int'(smnmie_cnt) + int'(mem_issued) - int'(mem_done);
    if (n < 0)   n = 0;
    if (n > 127) n = 127;
    smnmie_nxt = 7'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_cnt <= '0; miss_cnt <= '0; l1mp <= '0;
      mwin_cnt <= '0; inst_cnt <= '0; nipl1m_win <= '0;
      smnmie_cnt <= '0;
    end else if (kernel_start) begin
      acc_cnt <= '0; miss_cnt <= '0; l1mp <= '0;
      mwin_cnt <= '0; inst_cnt <= '0; nipl1m_win <= '0;
      smnmie_cnt <= '0;
    end else begin
      // L1-D miss percentage
      if (l1_access) begin
        acc_cnt <= acc_cnt + 1'b1;
        if (acc_cnt == '1) begin
          l1mp     <= 7'((32'(miss_cnt + (L1_WIN_LOG2+1)'(l1_miss)) * 100) >> L1_WIN_LOG2);
          miss_cnt <= '0;
        end else begin
          miss_cnt <= miss_cnt + (L1_WIN_LOG2+1)'(l1_miss);
        end
      end
      // instructions issued per L1-D miss
      begin
        if (l1_access && l1_miss) begin
          mwin_cnt <= mwin_cnt + 1'b1;
          if (mwin_cnt == '1) begin
            nipl1m_win <= 7'(ni >> MISS_WIN_LOG2);
            inst_cnt   <= '0;
          end else begin
            inst_cnt <= INST_W'(ni);
          end
        end else begin
          inst_cnt <= INST_W'(ni);
        end
      end
      // memory instructions in flight
      smnmie_cnt <= smnmie_nxt;
    end
  end

  assign nipl1m = (inst_cnt >= INST_CAP) ? 7'd100 : nipl1m_win;
  assign smnmie = smnmie_cnt;

  // ---------------- buckets -------------------------------------------------
  attr_bucketizer #(.VAL_W(7), .MAX_VAL(100), .NUM_BUCKETS(8), .THRESH_PCT(TH8_DEC))
    u_b_l1mp   (.value(l1mp),   .bucket(b_l1mp));
  attr_bucketizer #(.VAL_W(7), .MAX_VAL(100), .NUM_BUCKETS(4), .THRESH_PCT(TH4_INC))
    u_b_nipl1m (.value(nipl1m), .bucket(b_nipl1m));
  attr_bucketizer #(.VAL_W(7), .MAX_VAL(SMNMIE_MAX), .NUM_BUCKETS(4), .THRESH_PCT(TH4_INC))
    u_b_smnmie (.value(smnmie), .bucket(b_smnmie));
  attr_bucketizer #(.VAL_W(8), .MAX_VAL(NUM_WARPS), .NUM_BUCKETS(4), .THRESH_PCT(TH4_INC))
    u_b_nfmi   (.value(nfmi),   .bucket(b_nfmi));
  attr_bucketizer #(.VAL_W(8), .MAX_VAL(NUM_WARPS), .NUM_BUCKETS(4), .THRESH_PCT(TH4_INC))
    u_b_nrai   (.value(nrai),   .bucket(b_nrai));
endmodule
