// kansas_pkg: shared constants and types of the KAN-SAs accelerator core.
//
// The defaults describe the configuration evaluated as the main one: cubic
// B-splines (P = 3) on a uniform grid of G = 5 intervals, so every input has
// at most N = P + 1 = 4 non-zero basis functions among M = G + P = 8, int8
// operands, int32 partial sums, and a 16 x 16 array of N:M processing
// elements. The accumulator depth is this design's own choice.
package kansas_pkg;

  // B-spline hyperparameters of the synthesized configuration
  localparam int unsigned SPLINE_P  = 3;                      // spline degree
  localparam int unsigned GRID_G    = 5;                      // grid size
  localparam int unsigned NNZ       = SPLINE_P + 1;           // N of N:M
  localparam int unsigned NBASIS    = GRID_G + SPLINE_P;      // M of N:M
  localparam int unsigned MAX_INT   = GRID_G + 2 * SPLINE_P;  // intervals of the extended grid

  // Look-up table of the B-spline unit
  localparam int unsigned LUT_ADDR_W = 8;                     // x_a in [0,1] -> 0..255
  localparam int unsigned LUT_DEPTH  = 1 << LUT_ADDR_W;

  // Array and accumulator
  localparam int unsigned ROWS      = 16;
  localparam int unsigned COLS      = 16;
  localparam int unsigned ACC_DEPTH = 256;

  // Data types
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;
  typedef logic        [DATA_W-1:0] xq_t;    // quantized input or knot (unsigned)
  typedef logic signed [DATA_W-1:0] act_t;   // activation lane (B-spline value or MLP input)
  typedef logic signed [DATA_W-1:0] coef_t;  // coefficient (weight)
  typedef logic signed [ACC_W-1:0]  psum_t;  // partial sum

  // Operating mode carried with every input vector
  typedef enum logic {
    MODE_KAN = 1'b0,   // rows are fed by their B-spline unit
    MODE_MLP = 1'b1    // rows are fed N raw activations (MLP / bias term)
  } mode_t;

endpackage
