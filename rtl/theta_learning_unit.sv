// theta_learning_unit: the weight registers of the linear Q function and
// their SARSA update.
//
// Holds theta, NUM_ACT x NUM_VARS signed fixed-point weights shared by the
// NUM_SCHED warp schedulers of one SM.  Every cycle, for every scheduler k
// whose history is valid, it forms the temporal-difference error
//     delta_k = r_k + gamma * Q(s_c, a_c,k) - Q(s_p, a_p,k)
// where r_k is REWARD if scheduler k issued a warp in the previous cycle and
// PENALTY if it stalled, Q(s_p,a_p,k) is the value the scheduler stored when
// it chose a_p,k, and Q(s_c,a_c,k) is the value of its current choice.  The
// weights of the previous action are then moved by
//     theta[a_p,k][i] += (alpha * delta_k) >>> s_p[i]
// i.e. alpha*delta*phi with the feature 2^-s_p[i] done as a shift.  When both
// schedulers took the same previous action their two increments are added.
// Weights saturate at the limits of THETA_W bits.  'init' (start of a kernel)
// and reset load THETA_INIT into every weight, so learning starts afresh and
// optimistically.
//
// Timing: delta is combinational from the inputs; theta changes at the
// clock edge, one update per cycle.  gamma*Q and alpha*delta are the two
// real multiplications per scheduler; all feature products are shifts.
//
// The update rule, reward/penalty values and shift-for-multiply follow the
// paper.  Summing the two schedulers' increments and the saturation are this
// design's choices.
module theta_learning_unit
  import rlws_pkg::*;
#(
  parameter int unsigned NUM_SCHED  = 2,
  parameter rate_t       GAMMA      = GAMMA_DEF,
  parameter int          REWARD     = REWARD_DEF,
  parameter int          PENALTY    = PENALTY_DEF,
  parameter int          THETA_INIT = THETA_INIT_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  rate_t       alpha,
  input  state_t      sp,
  input  logic        hist_valid [NUM_SCHED],
  input  action_e     ap         [NUM_SCHED],
  input  qval_t       qp         [NUM_SCHED],
  input  logic        rwd        [NUM_SCHED],
  input  qval_t       qc         [NUM_SCHED],
  output theta_arr_t  theta,
  output logic signed [31:0] delta [NUM_SCHED]
);
  localparam int unsigned GQ_W   = Q_W + RATE_BITS + 1;  // Q * gamma
  localparam int unsigned D_W    = 32;                    // delta
  localparam int unsigned P_W    = D_W + RATE_BITS + 1;   // delta * alpha
  localparam int unsigned STEP_W = D_W + 2;               // alpha * delta
  localparam int unsigned NV_W   = STEP_W + 2;            // weight + steps
  localparam logic signed [NV_W-1:0] TMAX = NV_W'((64'sd1 <<< (THETA_W - 1)) - 1);
  localparam logic signed [NV_W-1:0] TMIN = NV_W'(-(64'sd1 <<< (THETA_W - 1)));

  logic signed [STEP_W-1:0] step [NUM_SCHED];   // alpha * delta, fixed point

  always_comb begin
    for (int k = 0; k < int'(NUM_SCHED); k++) begin
      logic signed [GQ_W-1:0] gq;
      logic signed [D_W-1:0]  d;
      logic signed [P_W-1:0]  p;
      gq = (GQ_W'(qc[k]) * $signed({1'b0, GAMMA})) >>> RATE_BITS;
      d  = (rwd[k] ? D_W'(REWARD) : D_W'(PENALTY)) + D_W'(gq) - D_W'(qp[k]);
      p  = P_W'(d) * $signed({1'b0, alpha});
      delta[k] = d;
      step[k]  = STEP_W'(p >>> RATE_BITS);
    end
  end

  theta_arr_t theta_nxt;

  always_comb begin
    for (int a = 0; a < int'(NUM_ACT); a++)
      for (int i = 0; i < int'(NUM_VARS); i++) begin
        logic signed [NV_W-1:0] nv;
        nv = NV_W'($signed(theta[a][i]));
        for (int k = 0; k < int'(NUM_SCHED); k++)
          if (hist_valid[k] && int'(ap[k]) == a)
            nv = nv + NV_W'(step[k] >>> sp[i]);
        if (nv > TMAX) nv = TMAX;
        if (nv < TMIN) nv = TMIN;
        theta_nxt[a][i] = THETA_W'(nv);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < int'(NUM_ACT); a++)
        for (int i = 0; i < int'(NUM_VARS); i++)
          theta[a][i] <= THETA_W'(THETA_INIT);
    end else if (init) begin
      for (int a = 0; a < int'(NUM_ACT); a++)
        for (int i = 0; i < int'(NUM_VARS); i++)
          theta[a][i] <= THETA_W'(THETA_INIT);
    end else begin
      theta <= theta_nxt;
    end
  end
endmodule
