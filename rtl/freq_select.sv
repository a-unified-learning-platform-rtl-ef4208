// freq_select: chooses the clock period of the current cycle.
//
// The period of a cycle is set by the delay class of the instruction that is
// in Execute during that cycle. The classes segment the 4.0 ns worst-case
// period as in the paper's experiments (see dfs_pkg::class_period_ps). During
// a replay (force_worst) the worst-case period is used, as the paper
// prescribes for a timing-erroneous instruction. An empty Execute slot (a
// bubble from the host pipeline) runs at the fastest period, since Execute
// then holds its inputs and has nothing to settle; that rule, and saturating
// out-of-range classes to the worst case, are this design's choices.
//
// Interface: purely combinational. period_sel is the operating point (class)
// handed to the clock generator; period_ps the matching period in ps.
module freq_select
  import dfs_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = 3
) (
  input  logic                ex_valid,
  input  logic [CLS_W-1:0]    ex_cls,
  input  logic                force_worst,
  output logic [CLS_W-1:0]    period_sel,
  output logic [PERIOD_W-1:0] period_ps
);

  localparam logic [CLS_W-1:0] WORST = CLS_W'(NUM_CLASSES - 1);

  always_comb begin
    if (force_worst)                   period_sel = WORST;
    else if (!ex_valid)                period_sel = '0;
    else if (32'(ex_cls) >= NUM_CLASSES) period_sel = WORST;
    else                               period_sel = ex_cls;
    period_ps = class_period_ps(NUM_CLASSES, 32'(period_sel));
  end

endmodule
