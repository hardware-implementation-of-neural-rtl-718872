// nnsic_pkg: types and functions shared by the neural self-interference canceller.
//
// Holds the activation-function selector of a macro-pipeline stage, the target
// selector and record of the external parameter-write port (one Q-bit value,
// or one complex tap, per write, addressed by layer, neuron and input), and a
// ceiling division used to size the schedules at elaboration time. The paper
// only says that all parameter memories can be written from outside; this
// write record and its encoding are this design's choice.
package nnsic_pkg;

  // Activation applied by a stage's output interface.
  typedef enum logic {
    ACT_LINEAR = 1'b0,
    ACT_RELU   = 1'b1
  } act_e;

  // Which parameter memory an external write goes to.
  typedef enum logic [1:0] {
    CFG_W     = 2'd0,   // weight W_layer[row=neuron][col=input]
    CFG_B     = 2'd1,   // bias   b_layer[row]
    CFG_H     = 2'd2,   // linear canceller tap h[col] (re, im)
    CFG_SHIFT = 2'd3    // denormalization exponent (signed, in re)
  } cfg_target_e;

  // One external write. layer counts the NN layers from 0 (first hidden
  // layer) to NL (output layer). Data fields are 32 bits wide; a block keeps
  // the low Q bits.
  typedef struct packed {
    logic        we;
    cfg_target_e target;
    logic [3:0]  layer;
    logic [7:0]  row;
    logic [7:0]  col;
    logic [31:0] re;
    logic [31:0] im;
  } cfg_wr_t;

  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
