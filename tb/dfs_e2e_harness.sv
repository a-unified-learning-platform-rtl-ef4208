// dfs_e2e_harness: reusable end-to-end environment for one DFS core
// configuration, used by the workload testbench.
//
// It contains the core (with the given class and tree counts), the adaptive
// clock model, a timed model of the host Execute stage and a scoreboard.
// Instruction i of the random stream has type t in 0..NUM_CLASSES-1 and the
// forest is programmed to classify by type (class = t). The Execute model
// makes the instruction meet its class period with 0.2 ns to spare, except
// when the top byte of operand 2 is below MISS_PER256 and the class is not the
// slowest: then it takes 0.5 ns more than its period (a misclassification,
// about MISS_PER256/256 of the instructions), which the double sampler must catch
// (SHADOW_PS must exceed 0.5 ns and stay below every Execute delay).
// Results must leave in order with the right values; the run reports cycles,
// elapsed time, timing errors and the speed-up over a fixed 4.0 ns clock.
`timescale 1ns/1ps
module dfs_e2e_harness
  import dfs_pkg::*;
#(
  parameter int NUM_CLASSES = 3,
  parameter int NUM_TREES   = 100,
  parameter int N_INSTR     = 1000,
  parameter int SHADOW_PS   = 1400,
  parameter int MISS_PER256 = 16
) (
  output logic done,
  output int   checks,
  output int   failures
);

  logic enable = 1'b0, rst_n = 1'b0;
  logic clk, clk_shadow;
  tree_cfg_t cfg;
  logic id_valid, id_stall, ex_valid, res_valid, res_err, replay_active, replay_start;
  instr_t id_instr, ex_instr;
  logic [CLS_W-1:0] ex_cls, period_sel;
  logic [DATA_W-1:0] ex_result, res_data;
  logic [TAG_W-1:0] res_tag;
  logic [PERIOD_W-1:0] period_ps;

  dfs_ml_core #(.NUM_TREES(NUM_TREES), .NUM_CLASSES(NUM_CLASSES)) u_core (.*);
  adaptive_clock_model #(.SHADOW_PS(SHADOW_PS)) u_clk (.enable, .period_ps, .clk, .clk_shadow);

  function automatic logic [DATA_W-1:0] exe_value(input instr_t i);
    return (i.op1 ^ {i.op2[15:0], i.op2[31:16]}) + 32'(i.itype);
  endfunction

  function automatic int exe_delay_ps(input instr_t i);
    int p = int'(class_period_ps(NUM_CLASSES, int'(i.itype)));
    return (int'(i.op2[31:24]) < MISS_PER256 && int'(i.itype) < NUM_CLASSES - 1) ? p + 500 : p - 200;
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("[%0d classes] t=%0t %s", NUM_CLASSES, $time, what);
    end
  endtask

  typedef struct {
    logic   valid;
    instr_t instr;
    logic [DATA_W-1:0] value;
    int     delay_ps;
    int     period;
  } launch_t;
  launch_t l0, l1;

  instr_t sent[$];
  int n_err = 0, n_res = 0, n_cycles = 0;
  logic taken = 1'b0;

  initial begin
    ex_result = '0;
    checks = 0;
    failures = 0;
    done = 1'b0;
    l0 = '{valid: 1'b0, instr: '0, value: '0, delay_ps: 0, period: 0};
    l1 = l0;
  end

  always @(posedge clk) begin
    taken = id_valid && !id_stall;
    if (rst_n) begin
      n_cycles++;
      if (res_valid) begin
        chk(l1.valid && res_tag == l1.instr.tag, "result does not match the launched instruction");
        if (res_err) begin
          n_err++;
          chk(l1.delay_ps > l1.period, "false timing error");
        end else begin
          n_res++;
          chk(sent.size() != 0 && sent[0].tag == res_tag && res_data == exe_value(sent[0]),
              "result wrong or out of order");
          if (sent.size() != 0) void'(sent.pop_front());
        end
      end
      l1 = l0;
    end
  end

  always @(posedge clk) begin
    #0.001;
    if (rst_n) begin
      l0.valid  = ex_valid;
      l0.period = int'(period_ps);
      if (ex_valid) begin
        automatic instr_t i = ex_instr;
        automatic logic [DATA_W-1:0] v = exe_value(i);
        automatic int d = exe_delay_ps(i);
        l0.instr = i;
        l0.value = v;
        l0.delay_ps = d;
        chk(int'(period_ps) == (replay_active ? WORST_PS : int'(class_period_ps(NUM_CLASSES, int'(i.itype)))),
            "period of class");
        fork
          begin
            #((d - 1) / 1000.0) ex_result = v;
          end
        join_none
      end
    end
  end

  task automatic cfg_write(input int tr, input int node, input logic [DATA_W-1:0] thr);
    @(negedge clk);
    cfg.we   = 1'b1;
    cfg.tree = 8'(tr);
    cfg.node = 8'(node);
    cfg.fsel = F_TYPE;
    cfg.thr  = thr;
  endtask

  // Every tree: type <= 0 -> class 0, type <= 1 -> 1, type <= 2 -> 2, else 3,
  // capped at NUM_CLASSES-1 (internal nodes 0, 2 and 6 split, the rest go left).
  task automatic program_forest();
    for (int tr = 0; tr < NUM_TREES; tr++) begin
      for (int k = 0; k < 15; k++)
        cfg_write(tr, k, (k == 0) ? 32'd0 : (k == 2) ? 32'd1 : (k == 6) ? 32'd2 : '1);
      for (int k = 0; k < 16; k++) begin
        int c = (k < 8) ? 0 : (k < 12) ? 1 : (k < 14) ? 2 : 3;
        cfg_write(tr, 15 + k, DATA_W'((c > NUM_CLASSES - 1) ? NUM_CLASSES - 1 : c));
      end
    end
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  initial begin
    int sent_n;
    int c0, base;
    realtime t0;
    cfg = '0;
    id_valid = 1'b0;
    id_instr = '0;
    enable = 1'b1;
    repeat (3) @(posedge clk);
    #0.2 rst_n = 1'b1;
    program_forest();
    repeat (4) @(negedge clk);
    t0 = $realtime;
    c0 = n_cycles;
    sent_n = 0;
    while (sent_n < N_INSTR) begin
      @(negedge clk);
      if (taken || !id_valid) begin
        if (taken) begin
          sent.push_back(id_instr);
          sent_n++;
        end
        id_valid = sent_n < N_INSTR;
        id_instr.itype = TYPE_W'($urandom_range(0, NUM_CLASSES - 1));
        id_instr.op1   = $urandom;
        id_instr.op2   = $urandom;
        id_instr.tag   = TAG_W'(sent_n);
      end
    end
    id_valid = 1'b0;
    repeat (20) @(negedge clk);
    chk(sent.size() == 0 && n_res == N_INSTR, $sformatf("completed %0d of %0d", n_res, N_INSTR));
    chk(n_err > 0, "no timing error");
    // the same stream on a fixed 4.0 ns clock needs no replay cycles
    base = (n_cycles - c0) - 4 * n_err;
    $display("[%0d classes, %0d trees] %0d instructions, %0d cycles, %0d timing errors, %0.1f ns; fixed 4.0 ns clock: %0.1f ns; speed-up %0.2f",
             NUM_CLASSES, NUM_TREES, N_INSTR, n_cycles - c0, n_err, $realtime - t0,
             base * 4.0, (base * 4.0) / ($realtime - t0));
    done = 1'b1;
  end

endmodule
