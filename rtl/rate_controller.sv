// rate_controller: learning rate and exploration rate over the two phases
// of a kernel.
//
// Phase 1 lasts from the start of a kernel while thread blocks are still
// waiting to be assigned to SMs (tb_waiting); phase 2 starts when the last
// one has been assigned and lasts to the end of the kernel.  In phase 1 both
// rates decay: every DECAY_PERIOD cycles each rate loses 2^-DECAY_SHIFT of
// its value, never going below its initial value >> FLOOR_SHIFT.  In phase 2
// both are held at their initial values.  'kernel_start' restores the
// initial values and phase 1 (or phase 2 at once if no block is waiting).
//
// Interface: alpha/epsilon outputs are registers; 'phase2' tells the phase
// and 'decay_tick' pulses for one cycle on every decay step.
//
// From the paper: decay in phase 1, constant initial rates in phase 2, the
// initial values 0.09 and 0.04.  The decay schedule (period, step, floor) is
// not given in the paper and is this design's choice.
module rate_controller
  import rlws_pkg::*;
#(
  parameter rate_t       ALPHA_INIT   = ALPHA_DEF,
  parameter rate_t       EPS_INIT     = EPS_DEF,
  parameter int unsigned DECAY_PERIOD = 1024,
  parameter int unsigned DECAY_SHIFT  = 4,
  parameter int unsigned FLOOR_SHIFT  = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  kernel_start,
  input  logic  tb_waiting,
  output rate_t alpha,
  output rate_t epsilon,
  output logic  phase2,
  output logic  decay_tick
);
  localparam int unsigned CNT_W = (DECAY_PERIOD > 1) ? $clog2(DECAY_PERIOD) : 1;
  localparam rate_t ALPHA_MIN = ALPHA_INIT >> FLOOR_SHIFT;
  localparam rate_t EPS_MIN   = EPS_INIT >> FLOOR_SHIFT;

  logic [CNT_W-1:0] cnt;

  function automatic rate_t decay(rate_t r, rate_t floor_v);
    rate_t n;
    n = r - (r >> DECAY_SHIFT);
    return (n < floor_v) ? floor_v : n;
  endfunction

  assign decay_tick = !phase2 && tb_waiting && (cnt == CNT_W'(DECAY_PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alpha   <= ALPHA_INIT;
      epsilon <= EPS_INIT;
      phase2  <= 1'b0;
      cnt     <= '0;
    end else if (kernel_start) begin
      alpha   <= ALPHA_INIT;
      epsilon <= EPS_INIT;
      phase2  <= 1'b0;
      cnt     <= '0;
    end else if (phase2 || !tb_waiting) begin
      // last block assigned: rates back to and held at their initial values
      phase2  <= 1'b1;
      alpha   <= ALPHA_INIT;
      epsilon <= EPS_INIT;
    end else begin
      cnt <= decay_tick ? '0 : cnt + 1'b1;
      if (decay_tick) begin
        alpha   <= decay(alpha, ALPHA_MIN);
        epsilon <= decay(epsilon, EPS_MIN);
      end
    end
  end
endmodule
