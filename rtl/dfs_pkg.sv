// dfs_pkg: types and constants shared by the ML-driven dynamic frequency
// scaling (DFS) core.
//
// The core sits between the Decode and Execute stages of a 32-bit MIPS
// pipeline. Every instruction is classified into a propagation-delay class by
// a Random Forest, and the clock period of the cycle in which the instruction
// executes is chosen from that class. This package holds the instruction
// bundle that travels through the core, the six ML features, the per-tree
// configuration word, and the table of clock periods per class.
//
// The class boundaries (in ps, against a 4.0 ns worst case) follow the paper's
// experiments: 2 classes {2.2, 4.0}, 3 classes {1.8, 2.6, 4.0},
// 4 classes {1.0, 2.0, 3.0, 4.0}. Class 0 is always the fastest period and the
// highest class the worst-case period. Widths of the instruction-type field and
// of the tag are this design's own choices.
package dfs_pkg;

  localparam int DATA_W       = 32;  // MIPS data word
  localparam int TYPE_W       = 12;  // instruction type: {opcode, funct}
  localparam int TAG_W        = 8;   // opaque per-instruction tag of the host pipeline
  localparam int CLS_W        = 2;   // up to four delay classes
  localparam int MAX_CLASSES  = 4;
  localparam int NUM_FEATURES = 6;
  localparam int FSEL_W       = 3;
  localparam int PERIOD_W     = 16;  // clock period in ps
  localparam int WORST_PS     = 4000;

  // The six ML features of the classifier stage.
  typedef enum logic [FSEL_W-1:0] {
    F_TYPE     = 3'd0,  // current instruction type
    F_OP1      = 3'd1,  // current operand 1
    F_OP2      = 3'd2,  // current operand 2
    F_TGL1     = 3'd3,  // operand 1 XOR previous operand 1 (bit toggles)
    F_TGL2     = 3'd4,  // operand 2 XOR previous operand 2 (bit toggles)
    F_PREV_OUT = 3'd5   // previous Execute output
  } feature_e;

  typedef logic [DATA_W-1:0] feat_vec_t [NUM_FEATURES];

  // Instruction bundle handed from Decode to the ML stage and on to Execute.
  typedef struct packed {
    logic [TYPE_W-1:0] itype;
    logic [DATA_W-1:0] op1;
    logic [DATA_W-1:0] op2;
    logic [TAG_W-1:0]  tag;
  } instr_t;

  // Configuration write into the Random Forest. node < 2**DEPTH-1 addresses an
  // internal node (fsel, thr); node >= 2**DEPTH-1 addresses a leaf, whose class
  // is taken from thr[CLS_W-1:0].
  typedef struct packed {
    logic              we;
    logic [7:0]        tree;
    logic [7:0]        node;
    feature_e          fsel;
    logic [DATA_W-1:0] thr;
  } tree_cfg_t;

  // Clock period of a class for a configuration with nc classes.
  function automatic logic [PERIOD_W-1:0] class_period_ps(input int nc, input int cls);
    case (nc)
      2:       return (cls == 0) ? 16'd2200 : 16'd4000;
      3:       case (cls)
                 0:       return 16'd1800;
                 1:       return 16'd2600;
                 default: return 16'd4000;
               endcase
      4:       case (cls)
                 0:       return 16'd1000;
                 1:       return 16'd2000;
                 2:       return 16'd3000;
                 default: return 16'd4000;
               endcase
      default: return 16'd4000;
    endcase
  endfunction

endpackage
