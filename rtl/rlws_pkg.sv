// rlws_pkg: types and constants shared by the reinforcement-learning warp
// scheduler (RLWS).
//
// The scheduler is a SARSA agent whose Q function is linear in a feature
// vector phi(s,a) with features 2^-v (v = bucket value of a state variable),
// so every multiply by a feature is a right shift.  All learned quantities
// are signed fixed point with FRAC_BITS fractional bits; rates (learning rate,
// exploration rate, discount factor) are unsigned fractions of 2^RATE_BITS.
//
// Numbers taken from the paper: the five SELECT_PIPELINE actions and their
// order, the eight state variables the genetic search kept and their bucket
// counts, alpha = 0.09, epsilon = 0.04, gamma = 0.95, reward 1, penalty 0,
// 24 warps per scheduler, 2 schedulers per SM, 15 SMs.  The fixed-point
// widths, the bucket thresholds other than the paper's one example, and the
// initial weight value are this design's choices.
package rlws_pkg;

  // ---------------- actions (order of the paper's action table) -----------
  localparam int unsigned NUM_ACT = 5;
  typedef enum logic [2:0] {
    ACT_NO_INSTR = 3'd0,  // schedule no warp
    ACT_SP       = 3'd1,  // schedule a warp to the SP pipeline
    ACT_SFU      = 3'd2,  // schedule a warp to the SFU pipeline
    ACT_GMEM     = 3'd3,  // warp accessing global memory to the MEM pipeline
    ACT_STCMEM   = 3'd4   // warp accessing shared/texture/constant memory
  } action_e;

  // class of the next instruction of a warp
  typedef enum logic [1:0] {
    IC_SP     = 2'd0,
    IC_SFU    = 2'd1,
    IC_GMEM   = 2'd2,
    IC_STCMEM = 2'd3
  } iclass_e;

  // status of one warp slot as seen by the scheduler each cycle
  typedef struct packed {
    logic    instr_valid;  // instruction buffer holds a valid next instruction
    logic    ready;        // that instruction can issue this cycle
    iclass_e iclass;       // its class
  } warp_status_t;

  // ---------------- state variables (genetic-search result) ---------------
  localparam int unsigned NUM_VARS = 8;
  localparam int unsigned V_AGML   = 0;  // average global memory latency (GPU)
  localparam int unsigned V_GNMIE  = 1;  // mem instrs executing on GPU (GPU)
  localparam int unsigned V_L1MP   = 2;  // L1-D miss percentage
  localparam int unsigned V_L2MP   = 3;  // L2 miss percentage (GPU)
  localparam int unsigned V_NFMI   = 4;  // warps whose next instr is memory
  localparam int unsigned V_NIPL1M = 5;  // instrs issued per L1-D miss
  localparam int unsigned V_NRAI   = 6;  // warps with a ready ALU instr
  localparam int unsigned V_SMNMIE = 7;  // mem instrs executing on the SM

  localparam int unsigned BKT_W = 3;     // up to 8 buckets
  typedef logic [BKT_W-1:0] bucket_t;
  typedef logic [NUM_VARS-1:0][BKT_W-1:0] state_t;

  // bucket thresholds, in percent of a variable's value range; entry i is
  // the lowest value (inclusive) of bucket i+1.  Unused entries are 101.
  typedef int unsigned thresh_t [7];
  localparam thresh_t TH2      = '{50, 101, 101, 101, 101, 101, 101};
  localparam thresh_t TH4_INC  = '{10, 30, 60, 101, 101, 101, 101};   // paper's example
  localparam thresh_t TH4_DEC  = '{40, 70, 90, 101, 101, 101, 101};
  localparam thresh_t TH8_INC  = '{3, 7, 13, 21, 32, 46, 65};
  localparam thresh_t TH8_DEC  = '{35, 54, 68, 79, 87, 93, 97};

  // ---------------- fixed point --------------------------------------------
  localparam int unsigned FRAC_BITS = 16;
  localparam int unsigned THETA_W   = 24;           // weights: +-128
  localparam int unsigned Q_W       = THETA_W + 4;  // sum of NUM_VARS weights
  localparam int unsigned RATE_BITS = 16;

  typedef logic signed [THETA_W-1:0] theta_t;
  typedef logic signed [Q_W-1:0]     qval_t;
  typedef logic [RATE_BITS-1:0]      rate_t;
  typedef logic [NUM_ACT-1:0][NUM_VARS-1:0][THETA_W-1:0] theta_arr_t;
  typedef logic [NUM_ACT-1:0][Q_W-1:0] q_arr_t;

  // RL parameters of the chosen configuration, as fractions of 2^16
  localparam rate_t ALPHA_DEF = rate_t'(5898);   // 0.09
  localparam rate_t EPS_DEF   = rate_t'(2621);   // 0.04
  localparam rate_t GAMMA_DEF = rate_t'(62259);  // 0.95
  localparam int    REWARD_DEF  = 1 << FRAC_BITS;  // 1.0
  localparam int    PENALTY_DEF = 0;               // 0.0

  // Optimistic start: Q = r_max / (1 - gamma) = 20 in the all-zero state,
  // spread evenly over the NUM_VARS weights of each action (2.5 each).
  localparam int    THETA_INIT_DEF = (20 << FRAC_BITS) / NUM_VARS;

  function automatic action_e class_to_action(iclass_e c);
    case (c)
      IC_SP:     return ACT_SP;
      IC_SFU:    return ACT_SFU;
      IC_GMEM:   return ACT_GMEM;
      default:   return ACT_STCMEM;
    endcase
  endfunction

endpackage
