// warp_selector: picks the warp that carries out the chosen action.
//
// Candidates are the ready warps of the pool whose next instruction belongs
// to the chosen action's class.  The warp issued by this scheduler in the
// previous cycle is kept if it is a candidate (greedy); otherwise the oldest
// candidate is taken.  Age is an age matrix: older[i][j] = 1 when warp slot i
// holds an older warp than slot j.  A slot that receives a new warp (launch)
// becomes younger than every other slot; slots launched in the same cycle
// are ordered by index.  At reset the order is the slot index.
//
// Interface: ready/iclass per slot, the action and 'issue' (the scheduler
// issues this cycle) in; sel_valid/sel_idx out combinationally, together
// with 'sel_last' (the previous warp was kept).  The last-issued register
// and the age matrix update on the clock edge.  NO_INSTR has no candidates.
//
// The selection rule is the paper's; the age matrix is this design's way of
// knowing which warp is oldest.
module warp_selector
  import rlws_pkg::*;
#(
  parameter int unsigned WPS   = 24,
  localparam int unsigned IDX_W = (WPS > 1) ? $clog2(WPS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [WPS-1:0]       launch,
  input  logic [WPS-1:0]       ready,
  input  iclass_e              iclass [WPS],
  input  action_e              action,
  input  logic                 issue,
  output logic                 sel_valid,
  output logic [IDX_W-1:0]     sel_idx,
  output logic                 sel_last
);
  logic [WPS-1:0][WPS-1:0] older;
  logic                    last_valid;
  logic [IDX_W-1:0]        last_idx;
  logic [WPS-1:0]          cand, oldest;

  always_comb begin
    for (int i = 0; i < int'(WPS); i++)
      cand[i] = ready[i] && (action != ACT_NO_INSTR) &&
                (class_to_action(iclass[i]) == action);
    for (int i = 0; i < int'(WPS); i++) begin
      oldest[i] = cand[i];
      for (int j = 0; j < int'(WPS); j++)
        if (j != i && cand[j] && older[j][i]) oldest[i] = 1'b0;
    end
    sel_last  = last_valid && cand[last_idx];
    sel_valid = |cand;
    sel_idx   = '0;
    if (sel_last) sel_idx = last_idx;
    else begin
      for (int i = int'(WPS) - 1; i >= 0; i--)
        if (oldest[i]) sel_idx = IDX_W'(i);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(WPS); i++)
        for (int j = 0; j < int'(WPS); j++)
          older[i][j] <= (i < j);
      last_valid <= 1'b0;
      last_idx   <= '0;
    end else begin
      for (int i = 0; i < int'(WPS); i++)
        for (int j = 0; j < int'(WPS); j++) begin
          if (i == j)                      older[i][j] <= 1'b0;
          else if (launch[i] && launch[j]) older[i][j] <= (i < j);
          else if (launch[i])              older[i][j] <= 1'b0;
          else if (launch[j])              older[i][j] <= 1'b1;
        end
      last_valid <= issue && sel_valid;
      if (issue && sel_valid) last_idx <= sel_idx;
    end
  end
endmodule
