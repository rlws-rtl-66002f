// lfsr16: 16-bit maximal-length Galois LFSR (taps 16,14,13,11), the random
// source of the exploration decision.  One step per cycle while 'en' is high.
// SEED must be non-zero; reset and 'reseed' load it.  'rnd' is the current
// register value.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] rnd
);
  logic [15:0] r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  r <= (SEED == 16'd0) ? 16'h0001 : SEED;
    else if (en) r <= {1'b0, r[15:1]} ^ (r[0] ? 16'hB400 : 16'h0000);
  end
  assign rnd = r;
endmodule
