// tb_double_sampler: drives the Execute output node with results that settle
// either before or after the main clock edge and checks that the main sample,
// its valid flag and the timing-error flag (compared after the shadow edge)
// behave as expected. Clock: 2.0 ns period, shadow clock delayed by 1.2 ns.
`timescale 1ns/1ps
module tb_double_sampler;
  import dfs_pkg::*;

  localparam realtime PERIOD = 2.0;
  localparam realtime SHADOW = 1.2;

  logic clk = 1'b0, clk_shadow = 1'b0, rst_n = 1'b0;
  logic [DATA_W-1:0] d = '0, q;
  logic in_valid = 1'b0, q_valid, err;
  int checks = 0, failures = 0;

  double_sampler dut (.*);

  always #(PERIOD / 2) clk = ~clk;
  initial begin
    #(SHADOW);
    forever #(PERIOD / 2) clk_shadow = ~clk_shadow;
  end

  initial begin
    #5000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Launch one value at a rising edge that settles after 'delay'.
  task automatic launch(input logic [DATA_W-1:0] val, input realtime delay, input logic v);
    in_valid = v;
    fork
      begin
        #(delay) d = val;
      end
    join_none
  endtask

  initial begin
    logic [DATA_W-1:0] old_v, new_v;
    #3 rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      realtime dl;
      logic late, v;
      @(posedge clk);
      old_v = d;
      new_v = $urandom;
      late  = $urandom_range(0, 2) == 0;
      v     = $urandom_range(0, 4) != 0;
      // settles inside the cycle (0.3..1.9 ns) or after the main edge but
      // before the shadow edge (2.1..3.1 ns after launch)
      dl = late ? 2.1 + ($urandom_range(0, 10) / 10.0) : 0.3 + ($urandom_range(0, 16) / 10.0);
      launch(new_v, dl, v);
      @(posedge clk);
      #0.1;
      in_valid = 1'b0;
      checks++;
      if (q_valid !== v || q !== (late ? old_v : new_v)) begin
        failures++;
        $display("n=%0d main sample q=%h valid=%b, expected %h %b", n, q, q_valid, late ? old_v : new_v, v);
      end
      #(SHADOW);  // after the shadow edge
      checks++;
      if (err !== (v && late && old_v != new_v)) begin
        failures++;
        $display("n=%0d err=%b expected %b", n, err, v && late);
      end
      // let the node settle before the next launch
      #(PERIOD * 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
