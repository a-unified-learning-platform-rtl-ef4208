// tb_freq_select: exhaustive check of period selection for the two-, three-
// and four-class configurations against the class boundaries of a 4.0 ns
// worst-case period ({2.2,4.0}, {1.8,2.6,4.0}, {1.0,2.0,3.0,4.0} ns).
`timescale 1ns/1ps
module tb_freq_select;
  import dfs_pkg::*;

  logic ex_valid, force_worst;
  logic [CLS_W-1:0] ex_cls;
  logic [CLS_W-1:0] sel2, sel3, sel4;
  logic [PERIOD_W-1:0] ps2, ps3, ps4;
  int checks = 0, failures = 0;

  freq_select #(.NUM_CLASSES(2)) u2 (.ex_valid, .ex_cls, .force_worst, .period_sel(sel2), .period_ps(ps2));
  freq_select                    u3 (.ex_valid, .ex_cls, .force_worst, .period_sel(sel3), .period_ps(ps3));
  freq_select #(.NUM_CLASSES(4)) u4 (.ex_valid, .ex_cls, .force_worst, .period_sel(sel4), .period_ps(ps4));

  int p2 [2] = '{2200, 4000};
  int p3 [3] = '{1800, 2600, 4000};
  int p4 [4] = '{1000, 2000, 3000, 4000};

  task automatic chk(input string what, input int got_sel, input int got_ps,
                     input int nc, input int exp_sel, input int exp_ps);
    checks++;
    if (got_sel != exp_sel || got_ps != exp_ps) begin
      failures++;
      $display("%s nc=%0d: sel %0d ps %0d, expected sel %0d ps %0d", what, nc, got_sel, got_ps, exp_sel, exp_ps);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2; v++)
      for (int f = 0; f < 2; f++)
        for (int c = 0; c < 4; c++) begin
          int e2, e3, e4;
          ex_valid = v[0]; force_worst = f[0]; ex_cls = CLS_W'(c);
          #1;
          e2 = f ? 1 : (!v ? 0 : (c > 1 ? 1 : c));
          e3 = f ? 2 : (!v ? 0 : (c > 2 ? 2 : c));
          e4 = f ? 3 : (!v ? 0 : c);
          chk("2-class", sel2, ps2, 2, e2, p2[e2]);
          chk("3-class", sel3, ps3, 3, e3, p3[e3]);
          chk("4-class", sel4, ps4, 4, e4, p4[e4]);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
