// gpu_attr_unit: the GPU-wide state variables, shared by all SMs.
//
//   GNMIE  memory instructions executing on the GPU: memory instructions
//          issued by all SMs minus those completed (saturating counter);
//   AGML   average global memory latency: exponential moving average of the
//          latency samples reported by the memory system,
//          avg += (sample - avg) >>> AGML_SHIFT;
//   L2MP   L2 miss percentage over windows of 2^L2_WIN_LOG2 L2 accesses.
// Each is bucketed once (2, 8 and 2 buckets, as the paper's search chose)
// and the buckets are sent to every SM.
//
// Interface: per-SM issued/completed memory instruction counts, one latency
// sample port and one L2 access/miss strobe pair per cycle.  Values are
// registers; buckets are combinational from them.  'kernel_start' clears
// everything.
//
// Which variables are GPU-wide is the paper's; how each is measured is this
// design's choice.
module gpu_attr_unit
  import rlws_pkg::*;
#(
  parameter int unsigned NUM_SM      = 15,
  parameter int unsigned CNT_W       = 2,    // per-SM count width
  parameter int unsigned AGML_SHIFT  = 3,
  parameter int unsigned L2_WIN_LOG2 = 7,
  parameter int unsigned GNMIE_MAX   = 600,
  parameter int unsigned AGML_MAX    = 800
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             kernel_start,
  input  logic [CNT_W-1:0] sm_mem_issued [NUM_SM],
  input  logic [CNT_W-1:0] sm_mem_done   [NUM_SM],
  input  logic             lat_valid,
  input  logic [9:0]       lat_value,
  input  logic             l2_access,
  input  logic             l2_miss,
  output logic [9:0]       gnmie,
  output logic [9:0]       agml,
  output logic [6:0]       l2mp,
  output bucket_t          b_gnmie,
  output bucket_t          b_agml,
  output bucket_t          b_l2mp
);
  logic [9+AGML_SHIFT:0]  agml_acc;   // average with AGML_SHIFT fraction bits
  logic [L2_WIN_LOG2-1:0] acc_cnt;
  logic [L2_WIN_LOG2:0]   miss_cnt;

  logic [9:0]            gnmie_nxt;
  logic [9+AGML_SHIFT:0] agml_nxt;

  always_comb begin
    int n, d;
    n = int'(gnmie);
    for (int s = 0; s < int'(NUM_SM); s++)
      n = n + int'(sm_mem_issued[s]) - int'(sm_mem_done[s]);
    if (n < 0)    n = 0;
    if (n > 1023) n = 1023;
    gnmie_nxt = 10'(n);
    d = (int'(lat_value) << AGML_SHIFT) - int'(agml_acc);
    agml_nxt = (10+AGML_SHIFT)'(int'(agml_acc) + (d >>> AGML_SHIFT));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnmie <= '0; agml_acc <= '0; acc_cnt <= '0; miss_cnt <= '0; l2mp <= '0;
    end else if (kernel_start) begin
      gnmie <= '0; agml_acc <= '0; acc_cnt <= '0; miss_cnt <= '0; l2mp <= '0;
    end else begin
      gnmie <= gnmie_nxt;
      if (lat_valid) agml_acc <= agml_nxt;
      if (l2_access) begin
        acc_cnt <= acc_cnt + 1'b1;
        if (acc_cnt == '1) begin
          l2mp     <= 7'((32'(miss_cnt + (L2_WIN_LOG2+1)'(l2_miss)) * 100) >> L2_WIN_LOG2);
          miss_cnt <= '0;
        end else begin
          miss_cnt <= miss_cnt + (L2_WIN_LOG2+1)'(l2_miss);
        end
      end
    end
  end

  assign agml = 10'(agml_acc >> AGML_SHIFT);

  attr_bucketizer #(.VAL_W(10), .MAX_VAL(GNMIE_MAX), .NUM_BUCKETS(8), .THRESH_PCT(TH8_INC))
    u_b_gnmie (.value(gnmie), .bucket(b_gnmie));
  attr_bucketizer #(.VAL_W(10), .MAX_VAL(AGML_MAX), .NUM_BUCKETS(2), .THRESH_PCT(TH2))
    u_b_agml  (.value(agml),  .bucket(b_agml));
  attr_bucketizer #(.VAL_W(7), .MAX_VAL(100), .NUM_BUCKETS(2), .THRESH_PCT(TH2))
    u_b_l2mp  (.value(l2mp),  .bucket(b_l2mp));
endmodule
