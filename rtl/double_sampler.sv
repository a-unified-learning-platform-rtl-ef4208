// double_sampler: timing-error detection on the Execute output.
//
// The Execute output node is sampled twice: by the main register at the
// (possibly shortened) clock edge that ends the cycle, and by a shadow
// register on clk_shadow, a copy of the clock delayed far enough that the
// node has settled for any instruction. If the two samples differ, the main
// register captured a value that was still changing and err is raised for the
// instruction now in the main register. The paper states only that the output
// is double-sampled; the Razor-style main/shadow pair is this design's choice.
//
// Timing: err is valid after the clk_shadow edge that follows the main edge and
// is meant to be used at the next main edge. Two constraints belong to the
// clock generator and the Execute logic: the shadow delay must be shorter than
// the shortest period, and no Execute output may change earlier than the
// shadow delay after a launch (short-path bound). in_valid (cleared for a
// squashed instruction) marks whether the sampled value belongs to a live
// instruction; err is only raised for live ones.
module double_sampler
  import dfs_pkg::*;
(
  input  logic              clk,
  input  logic              clk_shadow,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] d,
  input  logic              in_valid,
  output logic [DATA_W-1:0] q,
  output logic              q_valid,
  output logic              err
);

  logic [DATA_W-1:0] shadow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= '0;
      q_valid <= 1'b0;
    end else begin
      q       <= d;
      q_valid <= in_valid;
    end
  end

  always_ff @(posedge clk_shadow or negedge rst_n) begin
    if (!rst_n) shadow <= '0;
    else        shadow <= d;
  end

  assign err = q_valid && (q != shadow);

endmodule
