// gpu_env_model: behavioural model of the GPU around the warp scheduler,
// for testbenches only (not synthesizable, not part of the design).
//
// It models, per SM, NUM_WARPS warp slots grouped into thread blocks of
// TB_WARPS warps, a grid of thread blocks handed out by a thread
// block scheduler, and per warp a synthetic stream of INSTRS instructions
// whose classes (SP, SFU, global memory, shared/texture/constant memory)
// follow a fixed mix.  An issued instruction makes its warp wait a
// class-dependent latency (global loads: L1 hit or miss, random).  It
// produces the warp status, launch pulses, L1/L2 events, latency samples,
// memory completions and the thread-block-waiting flag, and it checks every
// issue it receives: the warp must be ready, belong to the issuing
// scheduler, match the action, and an SM may issue at most one SFU and one
// memory instruction per cycle.  NUM_KERNELS kernels are run back to back,
// each started by a one-cycle kernel_start.  The grid size of a kernel
// (kern_tb thread blocks) and the most thread blocks an SM may hold at once
// (kern_res, 0 for as many as fit) are inputs, sampled when the kernel
// starts, so one run can go through kernels of different sizes.
module gpu_env_model
  import rlws_pkg::*;
#(
  parameter int unsigned NUM_SM      = 2,
  parameter int unsigned NUM_SCHED   = 2,
  parameter int unsigned WPS         = 24,
  parameter int unsigned TB_WARPS    = 8,
  parameter int unsigned INSTRS      = 40,
  parameter int unsigned NUM_KERNELS = 2,
  parameter int unsigned SEED        = 1,
  localparam int unsigned NUM_WARPS  = NUM_SCHED * WPS,
  localparam int unsigned WID_W      = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  int               kern_tb,
  input  int               kern_res,
  output logic             kernel_start,
  output logic             tb_waiting,
  output warp_status_t     warp     [NUM_SM][NUM_WARPS],
  output logic [NUM_WARPS-1:0] launch [NUM_SM],
  output logic             l1_access [NUM_SM],
  output logic             l1_miss   [NUM_SM],
  output logic [1:0]       mem_done  [NUM_SM],
  output logic             lat_valid,
  output logic [9:0]       lat_value,
  output logic             l2_access,
  output logic             l2_miss,
  input  logic             issue_valid [NUM_SM][NUM_SCHED],
  input  logic [WID_W-1:0] issue_warp  [NUM_SM][NUM_SCHED],
  input  action_e          action      [NUM_SM][NUM_SCHED],
  output logic             all_done,
  output int               errors,
  output longint           issued_total,
  output longint           expected_total,
  output int               kernels_done,
  output int               conflicts      // SFU/MEM wanted by two schedulers
);
  localparam int unsigned TBS_PER_SM = NUM_WARPS / TB_WARPS;

  logic    active  [NUM_SM][NUM_WARPS];
  int      left    [NUM_SM][NUM_WARPS];
  int      wait_c  [NUM_SM][NUM_WARPS];
  logic    memwait [NUM_SM][NUM_WARPS];
  int      lat_acc [NUM_SM][NUM_WARPS];
  iclass_e cls     [NUM_SM][NUM_WARPS];
  int      pend    [NUM_SM];
  int      remaining;
  int      kernel;
  int      start_cnt;
  int      res_sm;

  function automatic iclass_e gen_class();
    int r;
    r = int'($urandom_range(99));
    if (r < 55) return IC_SP;
    if (r < 68) return IC_SFU;
    if (r < 88) return IC_GMEM;
    return IC_STCMEM;
  endfunction

  always_comb begin
    for (int s = 0; s < int'(NUM_SM); s++)
      for (int w = 0; w < int'(NUM_WARPS); w++) begin
        warp[s][w].instr_valid = active[s][w] && left[s][w] > 0;
        warp[s][w].ready       = active[s][w] && left[s][w] > 0 && wait_c[s][w] == 0;
        warp[s][w].iclass      = cls[s][w];
      end
    tb_waiting = (remaining > 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(NUM_SM); s++) begin
        for (int w = 0; w < int'(NUM_WARPS); w++) begin
          active[s][w] <= 1'b0; left[s][w] <= 0; wait_c[s][w] <= 0;
          memwait[s][w] <= 1'b0; lat_acc[s][w] <= 0; cls[s][w] <= IC_SP;
        end
        pend[s] <= 0; launch[s] <= '0; l1_access[s] <= 1'b0; l1_miss[s] <= 1'b0;
        mem_done[s] <= '0;
      end
      remaining <= 0; kernel <= 0; start_cnt <= 3; res_sm <= int'(TBS_PER_SM); kernel_start <= 1'b0;
      all_done <= 1'b0; errors <= 0; issued_total <= 0; expected_total <= 0;
      kernels_done <= 0; conflicts <= 0;
      lat_valid <= 1'b0; lat_value <= '0; l2_access <= 1'b0; l2_miss <= 1'b0;
    end else begin
      logic busy;
      logic lat_taken, l2_taken;
      int   n_err, n_iss, n_conf;
      int   rem;
      n_err = errors; n_iss = 0; n_conf = conflicts; rem = remaining;
      kernel_start <= 1'b0;
      lat_valid    <= 1'b0;
      l2_access    <= 1'b0;
      l2_miss      <= 1'b0;
      lat_taken = 1'b0;
      l2_taken  = 1'b0;
      busy = (remaining > 0);
      for (int s = 0; s < int'(NUM_SM); s++) begin
        logic [NUM_WARPS-1:0] ln;
        int nmem, nsfu, done_now;
        logic acc, miss;
        ln = '0; nmem = 0; nsfu = 0; done_now = 0; acc = 1'b0; miss = 1'b0;
        // ---- latencies and completions
        for (int w = 0; w < int'(NUM_WARPS); w++) begin
          if (active[s][w] && wait_c[s][w] > 0) begin
            wait_c[s][w]  <= wait_c[s][w] - 1;
            lat_acc[s][w] <= lat_acc[s][w] + 1;
            if (wait_c[s][w] == 1 && memwait[s][w]) begin
              done_now++;
              memwait[s][w] <= 1'b0;
              if (!lat_taken && lat_acc[s][w] > 0) begin
                lat_taken = 1'b1;
                lat_valid <= 1'b1;
                lat_value <= 10'(lat_acc[s][w] + 1);
              end
            end
          end
        end
        // ---- issues from the scheduler
        for (int k = 0; k < int'(NUM_SCHED); k++) begin
          if (issue_valid[s][k]) begin
            int w;
            w = int'(issue_warp[s][k]);
            if (w % int'(NUM_SCHED) != k) n_err++;
            else if (!(active[s][w] && left[s][w] > 0 && wait_c[s][w] == 0)) n_err++;
            else if (class_to_action(cls[s][w]) != action[s][k]) n_err++;
            else begin
              int lat;
              n_iss++;
              left[s][w]   <= left[s][w] - 1;
              cls[s][w]    <= gen_class();
              lat_acc[s][w] <= 0;
              memwait[s][w] <= 1'b0;
              case (cls[s][w])
                IC_SP:     lat = ($urandom_range(1) == 0) ? 0 : 6;  // independent next instruction or not
                IC_SFU:    begin lat = 16; nsfu++; end
                IC_STCMEM: begin lat = 24; nmem++; memwait[s][w] <= 1'b1; end
                default: begin
                  nmem++; memwait[s][w] <= 1'b1; acc = 1'b1;
                  miss = ($urandom_range(99) < 45);
                  lat  = miss ? 200 + int'($urandom_range(200)) : 30;
                  if (miss && !l2_taken) begin
                    l2_taken = 1'b1;
                    l2_access <= 1'b1;
                    l2_miss   <= ($urandom_range(99) < 60);
                  end
                end
              endcase
              wait_c[s][w] <= lat;
            end
          end
          // a lower-numbered scheduler took SFU/MEM while this one had such
          // a warp ready: the shared-pipeline rule was exercised
          if (k > 0 && (action[s][0] == ACT_SFU || action[s][0] == ACT_GMEM ||
                        action[s][0] == ACT_STCMEM)) begin
            for (int j = k; j < int'(NUM_WARPS); j += int'(NUM_SCHED))
              if (active[s][j] && left[s][j] > 0 && wait_c[s][j] == 0 &&
                  class_to_action(cls[s][j]) == action[s][0]) begin
                n_conf++;
                break;
              end
          end
        end
        if (nmem > 1 || nsfu > 1) n_err++;
        l1_access[s] <= acc;
        l1_miss[s]   <= miss;
        begin
          int p;
          p = pend[s] + done_now;
          mem_done[s] <= 2'((p > 3) ? 3 : p);
          pend[s]     <= (p > 3) ? p - 3 : 0;
        end
        // ---- retire finished warps, hand out thread blocks
        for (int g = 0; g < int'(TBS_PER_SM); g++) begin
          logic free, fin;
          free = 1'b1; fin = 1'b1;
          for (int j = 0; j < int'(TB_WARPS); j++) begin
            int w;
            w = g * int'(TB_WARPS) + j;
            if (active[s][w]) begin
              free = 1'b0;
              if (left[s][w] > 0 || wait_c[s][w] > 0) fin = 1'b0;
            end
          end
          if (!free) busy = 1'b1;
          if (!free && fin)
            for (int j = 0; j < int'(TB_WARPS); j++) active[s][g*int'(TB_WARPS)+j] <= 1'b0;
          if (free && rem > 0 && g < res_sm && start_cnt == 0 && !kernel_start) begin
            rem--;
            for (int j = 0; j < int'(TB_WARPS); j++) begin
              int w;
              w = g * int'(TB_WARPS) + j;
              ln[w] = 1'b1;
              active[s][w] <= 1'b1;
              left[s][w]   <= int'(INSTRS);
              wait_c[s][w] <= 0;
              cls[s][w]    <= gen_class();
            end
            break;   // one block per SM and cycle
          end
        end
        launch[s] <= ln;
      end
      errors       <= n_err;
      remaining    <= rem;
      conflicts    <= n_conf;
      issued_total <= issued_total + longint'(n_iss);
      // ---- kernel sequencing
      if (start_cnt > 0) begin
        start_cnt <= start_cnt - 1;
        if (start_cnt == 1) begin
          kernel_start   <= 1'b1;
          remaining      <= kern_tb;
          res_sm         <= (kern_res > 0 && kern_res < int'(TBS_PER_SM)) ? kern_res
                                                                        : int'(TBS_PER_SM);
          expected_total <= expected_total + longint'(kern_tb) * TB_WARPS * INSTRS;
        end
      end else if (!busy && !kernel_start && !all_done) begin
        kernels_done <= kernels_done + 1;
        kernel       <= kernel + 1;
        if (kernel + 1 >= int'(NUM_KERNELS)) all_done <= 1'b1;
        else start_cnt <= 3;
      end
    end
  end
endmodule
