// q_value_unit: Q values of all actions in the current state.
//
// Q(s,a) = phi(s,a)^T theta with feature 2^-v for every state variable, so
// Q(s,a) = sum_i (theta[a][i] >>> s[i]).  One shift-add tree per action;
// purely combinational.  The arithmetic right shift rounds towards minus
// infinity (plain truncation of the fixed-point value).
//
// Interface: theta (NUM_ACT x NUM_VARS signed weights), state (bucket value
// per variable) in; q (NUM_ACT signed values, Q_W bits) out.
//
// Follows the paper's function approximation and its shift-for-multiply
// hardware; the fixed-point format is this design's choice.
module q_value_unit
  import rlws_pkg::*;
(
  input  theta_arr_t theta,
  input  state_t     state,
  output q_arr_t     q
);
  always_comb begin
    for (int a = 0; a < int'(NUM_ACT); a++) begin
      qval_t acc;
      acc = '0;
      for (int i = 0; i < int'(NUM_VARS); i++)
        acc = acc + (qval_t'($signed(theta[a][i])) >>> state[i]);
      q[a] = acc;
    end
  end
endmodule
