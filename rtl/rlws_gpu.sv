// rlws_gpu: top level -- the reinforcement-learning warp scheduler of a GPU.
//
// NUM_SM copies of rlws_sm (one per streaming multiprocessor) and one
// gpu_attr_unit that measures the GPU-wide state variables (global memory
// latency, memory instructions in flight on the GPU, L2 miss percentage)
// and broadcasts their buckets to every SM.  The warp status, cache events
// and thread-block-waiting signal come from the GPU around the scheduler
// (instruction buffers, scoreboards, caches, thread block scheduler), which
// is not part of this design; the issued warps go back to it.
//
// Ports are arrays indexed by SM and, inside an SM, by scheduler or warp
// slot.  Timing is that of rlws_sm; the GPU-wide buckets are registered
// values one cycle behind their events.
//
// 15 SMs, 2 schedulers per SM and 48 warps per SM are the configuration the
// paper evaluates.
module rlws_gpu
  import rlws_pkg::*;
#(
  parameter int unsigned NUM_SM       = 15,
  parameter int unsigned NUM_SCHED    = 2,
  parameter int unsigned WPS          = 24,
  parameter int unsigned DECAY_PERIOD = 1024,
  localparam int unsigned NUM_WARPS   = NUM_SCHED * WPS,
  localparam int unsigned WID_W       = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             kernel_start,
  input  logic             tb_waiting,
  input  warp_status_t     warp     [NUM_SM][NUM_WARPS],
  input  logic [NUM_WARPS-1:0] launch [NUM_SM],
  input  logic             l1_access [NUM_SM],
  input  logic             l1_miss   [NUM_SM],
  input  logic [1:0]       mem_done  [NUM_SM],
  input  logic             lat_valid,
  input  logic [9:0]       lat_value,
  input  logic             l2_access,
  input  logic             l2_miss,
  output logic             issue_valid [NUM_SM][NUM_SCHED],
  output logic [WID_W-1:0] issue_warp  [NUM_SM][NUM_SCHED],
  output action_e          action      [NUM_SM][NUM_SCHED],
  output logic             explored    [NUM_SM][NUM_SCHED],
  output logic             kept_last   [NUM_SM][NUM_SCHED],
  output logic             other_possible [NUM_SM][NUM_SCHED],
  output logic             phase2     [NUM_SM],
  output logic             decay_tick [NUM_SM],
  output rate_t            alpha      [NUM_SM],
  output rate_t            epsilon    [NUM_SM],
  output state_t           state      [NUM_SM],
  output theta_arr_t       theta      [NUM_SM]
);
  bucket_t    b_agml, b_gnmie, b_l2mp;
  logic [9:0] gnmie, agml;
  logic [6:0] l2mp;
  logic [1:0] mem_issued [NUM_SM];

  gpu_attr_unit #(.NUM_SM(NUM_SM)) u_gattr (
    .clk(clk), .rst_n(rst_n), .kernel_start(kernel_start),
    .sm_mem_issued(mem_issued), .sm_mem_done(mem_done),
    .lat_valid(lat_valid), .lat_value(lat_value),
    .l2_access(l2_access), .l2_miss(l2_miss),
    .gnmie(gnmie), .agml(agml), .l2mp(l2mp),
    .b_gnmie(b_gnmie), .b_agml(b_agml), .b_l2mp(b_l2mp)
  );

  for (genvar s = 0; s < NUM_SM; s++) begin : g_sm
    rlws_sm #(.NUM_SCHED(NUM_SCHED), .WPS(WPS), .SM_ID(s), .DECAY_PERIOD(DECAY_PERIOD)) u_sm (
      .clk(clk), .rst_n(rst_n), .kernel_start(kernel_start), .tb_waiting(tb_waiting),
      .b_agml(b_agml), .b_gnmie(b_gnmie), .b_l2mp(b_l2mp),
      .warp(warp[s]), .launch(launch[s]),
      .l1_access(l1_access[s]), .l1_miss(l1_miss[s]), .mem_done(mem_done[s]),
      .issue_valid(issue_valid[s]), .issue_warp(issue_warp[s]), .action(action[s]),
      .explored(explored[s]), .kept_last(kept_last[s]),
      .other_possible(other_possible[s]), .mem_issued(mem_issued[s]),
      .phase2(phase2[s]), .decay_tick(decay_tick[s]),
      .alpha(alpha[s]), .epsilon(epsilon[s]), .state(state[s]), .theta(theta[s])
    );
  end
endmodule
