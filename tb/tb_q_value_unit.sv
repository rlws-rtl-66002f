// tb_q_value_unit: random weights and states; every Q value is compared with
// sum_i floor(theta[a][i] / 2^s[i]) computed in real arithmetic.
module tb_q_value_unit;
  import rlws_pkg::*;
  int checks = 0, failures = 0;
  theta_arr_t theta;
  state_t st;
  q_arr_t q;

  q_value_unit dut (.theta(theta), .state(st), .q(q));

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int a = 0; a < int'(NUM_ACT); a++)
        for (int i = 0; i < int'(NUM_VARS); i++)
          theta[a][i] = THETA_W'($urandom);
      for (int i = 0; i < int'(NUM_VARS); i++) st[i] = BKT_W'($urandom);
      if (n == 0) begin
        // all weights 2.5 and state 0: Q = 20 for every action
        for (int a = 0; a < int'(NUM_ACT); a++)
          for (int i = 0; i < int'(NUM_VARS); i++) theta[a][i] = THETA_W'(THETA_INIT_DEF);
        st = '0;
      end
      #1;
      for (int a = 0; a < int'(NUM_ACT); a++) begin
        real acc;
        acc = 0.0;
        for (int i = 0; i < int'(NUM_VARS); i++)
          acc += $floor(real'($signed(theta[a][i])) / (2.0 ** st[i]));
        checks++;
        if (real'($signed(q[a])) != acc) begin
          failures++;
          $display("FAIL a=%0d got %0d expected %0f", a, $signed(q[a]), acc);
        end
      end
      if (n == 0) begin
        checks++;
        if ($signed(q[0]) != (20 << FRAC_BITS)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
