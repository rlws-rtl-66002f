// tb_attr_bucketizer: sweeps every input value of three bucketizer
// configurations (4 growing buckets over 0..100, 8 shrinking buckets over
// 0..100, 4 growing buckets over 0..48 warps) and compares the bucket with
// one computed from the percentage in real arithmetic.
module tb_attr_bucketizer;
  import rlws_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] v;
  bucket_t b4, b8, bw;

  attr_bucketizer u4 (.value(v[6:0]), .bucket(b4));
  attr_bucketizer #(.VAL_W(7), .MAX_VAL(100), .NUM_BUCKETS(8), .THRESH_PCT(TH8_DEC))
    u8 (.value(v[6:0]), .bucket(b8));
  attr_bucketizer #(.VAL_W(8), .MAX_VAL(48), .NUM_BUCKETS(4), .THRESH_PCT(TH4_INC))
    uw (.value(v), .bucket(bw));

  function automatic int ref_bucket(int val, int maxv, int nb, int th [7]);
    real pct;
    int b;
    pct = real'(val) * 100.0 / real'(maxv);
    b = 0;
    for (int i = 0; i < nb - 1; i++) if (pct >= real'(th[i])) b++;
    return b;
  endfunction

  initial begin
    int t4 [7] = '{10, 30, 60, 0, 0, 0, 0};
    int t8 [7] = '{35, 54, 68, 79, 87, 93, 97};
    for (int i = 0; i <= 127; i++) begin
      v = 8'(i);
      #1;
      checks++;
      if (int'(b4) != ref_bucket(i, 100, 4, t4)) begin
        failures++; $display("FAIL 4-bucket v=%0d got %0d", i, b4);
      end
      checks++;
      if (int'(b8) != ref_bucket(i, 100, 8, t8)) begin
        failures++; $display("FAIL 8-bucket v=%0d got %0d", i, b8);
      end
      if (i <= 60) begin
        checks++;
        if (int'(bw) != ref_bucket(i, 48, 4, t4)) begin
          failures++; $display("FAIL warp-count v=%0d got %0d", i, bw);
        end
      end
    end
    // the paper's example: 0-9 % -> 0, 10-29 % -> 1, 30-59 % -> 2, 60-100 % -> 3
    v = 8'd9;  #1; checks++; if (b4 != 3'd0) failures++;
    v = 8'd10; #1; checks++; if (b4 != 3'd1) failures++;
    v = 8'd59; #1; checks++; if (b4 != 3'd2) failures++;
    v = 8'd60; #1; checks++; if (b4 != 3'd3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
