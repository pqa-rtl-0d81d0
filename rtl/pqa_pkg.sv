// pqa_pkg: types and helpers shared by the product-quantization accelerator (PQA).
// A layer is described to the engine by a run-time configuration (layer_cfg_t):
// prototype length Ls, number of prototypes Np, number of subspaces Ns, number
// of output channels Cout, number of input columns, the distance metric and the
// input-buffer bank that holds the layer input and the bank of prototypes and
// LUT_PQ it uses. Widths of the fields are this
// design's choice and only need to cover the maximum parameters of the engine.
package pqa_pkg;

  typedef enum logic {
    DIST_L1 = 1'b0,   // Manhattan distance, sum |x - b|
    DIST_L2 = 1'b1    // squared Euclidean distance, sum (x - b)^2
  } dist_mode_e;

  typedef struct packed {
    logic [7:0]  ls;        // prototype length Ls (elements per subspace), >= 1
    logic [7:0]  np;        // prototypes per subspace Np, >= 1
    logic [7:0]  ns;        // subspaces Ns, >= 1
    logic [9:0]  cout;      // output channels, >= 1
    logic [9:0]  ncols;     // input columns (W*H/s^2), >= 1
    dist_mode_e  mode;      // distance metric
    logic        in_bank;   // input-buffer bank holding this layer's input
    logic        wt_bank;   // prototype/LUT_PQ bank holding this layer's tables
  } layer_cfg_t;

  // Ceiling division used by the sequencer and by testbench models.
  function automatic int unsigned ceil_div(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage
