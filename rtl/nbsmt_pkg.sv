// nbsmt_pkg -- types and constants shared by the NB-SMT systolic array.
//
// Operands are 8-bit: activations are unsigned (post-ReLU), weights are
// two's complement. A "nibble" is the 4-bit reduced form of an operand.
// Products leave the flexible multipliers PROD_W bits wide and are summed
// into ACC_W-bit output-stationary accumulators (32 bits, as in the paper's
// PE drawing). PROD_W is this design's choice: the paper draws 16 bits,
// but two rounded 4b x 8b products can reach -61440, which needs 17.
package nbsmt_pkg;

  localparam int unsigned DATA_W = 8;
  localparam int unsigned PROD_W = 20;
  localparam int unsigned ACC_W  = 32;

  typedef logic        [DATA_W-1:0] act_t;   // unsigned activation
  typedef logic signed [DATA_W-1:0] wgt_t;   // signed weight
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Control flags that travel through the array with the activations.
  typedef struct packed {
    logic valid;   // this beat carries data of the current tile
    logic first;   // first beat of a tile: load psum instead of adding
  } beat_t;

  // What the precision controller did in one cycle (for monitoring).
  typedef struct packed {
    logic [2:0] n_active;   // threads whose activation and weight are both nonzero
    logic       collision;  // more than one thread needed the multiplier
    logic       lossy;      // precision reduction dropped nonzero bits
  } ctrl_stat_t;

endpackage
