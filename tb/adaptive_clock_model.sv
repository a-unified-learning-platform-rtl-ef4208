// adaptive_clock_model: behavioural model (not synthesizable) of the
// adaptive clock generator that the DFS core drives. At every rising edge of
// clk it reads the requested period (period_ps, valid just after the edge)
// and completes that cycle with a high and a low phase of half the period
// each, i.e. it switches period from one cycle to the next without delay.
// clk_shadow is a pulse SHADOW_PS after every rising edge of clk, used by the
// double sampler. Only enable == 1 lets the clock run.
`timescale 1ns/1ps
module adaptive_clock_model
  import dfs_pkg::*;
#(
  parameter int SHADOW_PS = 1400,
  parameter int PULSE_PS  = 300
) (
  input  logic                enable,
  input  logic [PERIOD_W-1:0] period_ps,
  output logic                clk,
  output logic                clk_shadow
);

  initial begin
    clk        = 1'b0;
    clk_shadow = 1'b0;
    wait (enable);
    forever begin
      realtime half;
      clk = 1'b1;
      fork
        begin
          #(SHADOW_PS / 1000.0) clk_shadow = 1'b1;
          #(PULSE_PS / 1000.0)  clk_shadow = 1'b0;
        end
      join_none
      #0.001;
      half = real'(period_ps) / 2000.0;
      #(half - 0.001) clk = 1'b0;
      #(half);
    end
  end

endmodule
