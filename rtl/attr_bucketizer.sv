// attr_bucketizer: maps a raw state-variable value onto a small bucket index.
//
// The value range 0..MAX_VAL of a state variable is split into NUM_BUCKETS
// sub-ranges of unequal size.  THRESH_PCT[i] is the lowest value of bucket
// i+1, given in percent of MAX_VAL, so bucket = number of thresholds the value
// reaches.  Comparisons are done as value*100 >= pct*MAX_VAL, so no divider is
// needed.  Values above MAX_VAL fall into the last bucket.
//
// Interface: value in, bucket out; purely combinational (the caller
// registers the state vector).
//
// From the paper: bucketing into 2..8 unequal sub-ranges, with growing
// sub-ranges for some variables and shrinking ones for others, and the
// example 0-9 / 10-29 / 30-59 / 60-100 % (the default here).  The threshold
// sets used for 2 and 8 buckets are this design's choice.
module attr_bucketizer
  import rlws_pkg::*;
#(
  parameter int unsigned VAL_W       = 7,
  parameter int unsigned MAX_VAL     = 100,
  parameter int unsigned NUM_BUCKETS = 4,
  parameter thresh_t     THRESH_PCT  = TH4_INC
) (
  input  logic [VAL_W-1:0] value,
  output bucket_t          bucket
);

  initial begin
    assert (NUM_BUCKETS >= 2 && NUM_BUCKETS <= 8)
      else $error("attr_bucketizer: NUM_BUCKETS must be 2..8");
  end

  always_comb begin
    logic [3:0] n;
    n = '0;
    for (int i = 0; i < 7; i++) begin
      if (i < int'(NUM_BUCKETS) - 1 &&
          64'(value) * 64'd100 >= 64'(THRESH_PCT[i]) * 64'(MAX_VAL))
        n = n + 4'd1;
    end
    bucket = bucket_t'(n);
  end

endmodule
