// dtnn_pkg: constants, types and tree-shape functions shared by the DTNN
// (dendrite-tree neural network) classifier.
//
// A Dtree neuron replaces one wide neuron by a tree of small lookup tables.
// Every level of the tree groups the previous level's signals FANIN at a time,
// so level l+1 has ceil(n_l / FANIN) nodes; the tree ends when one node is
// left. The functions below compute that shape at elaboration time, so every
// module sizes its tables and wiring from N_IN and FANIN alone.
//
// The classifier numbers follow the paper's MNIST classifiers: 28x28 binary
// input, 10 classes, an ensemble of 5 MLPs, a hidden layer of 216 neurons in
// the larger MLP and 6-input LUT nodes. The 8-bit pixel width and the 8-bit
// threshold codes are this design's choice (the paper gives the thresholds as
// fractions of a 0..1 pixel range: 0.2, 0.4, 0.5, 0.6, 0.8; code = round(t*255)).
//
// LUT contents are the trained network and are not known to the hardware
// designer, so they are written at run time through a configuration port
// (cfg_t): one whole table per write, addressed by ensemble member, layer,
// neuron and LUT index inside the neuron. That port is this design's choice.
package dtnn_pkg;

  // ---- network shape -------------------------------------------------------
  localparam int unsigned DT_FANIN  = 6;    // inputs of one LUT node (6-LUT)
  localparam int unsigned N_PIX     = 784;  // 28 x 28 x 1 input image
  localparam int unsigned N_CLASS   = 10;   // digit classes
  localparam int unsigned N_HIDDEN  = 216;  // hidden neurons of MLP-2
  localparam int unsigned N_ENS     = 5;    // MLPs in the ensemble
  localparam int unsigned PIX_W     = 8;    // pixel code width (assumed)

  // Binarisation thresholds of the five ensemble members, as 8-bit codes of
  // 0.2, 0.4, 0.5, 0.6 and 0.8 of full scale.
  localparam logic [PIX_W-1:0] THRESH_DEFAULT [N_ENS] =
    '{8'd51, 8'd102, 8'd128, 8'd153, 8'd204};

  // ---- configuration port ----------------------------------------------------
  localparam int unsigned CFG_TBL_W = 1 << DT_FANIN;   // bits in one binary 6-LUT

  typedef enum logic [1:0] {
    CFG_HIDDEN   = 2'd0,   // hidden layer of an ensemble member
    CFG_OUTPUT   = 2'd1,   // output layer of an ensemble member
    CFG_COMBINER = 2'd2    // ensemble combiner (member field ignored)
  } cfg_layer_e;

  typedef struct packed {
    logic             we;      // write one LUT table this cycle
    logic [2:0]       member;  // ensemble member 0..N_ENS-1
    cfg_layer_e       layer;
    logic [7:0]       neuron;  // neuron inside the layer
    logic [7:0]       lut;     // LUT inside the neuron (level order, see below)
    logic [CFG_TBL_W-1:0] data;    // table contents; bit k is the output for index k
  } cfg_t;

  // ---- tree shape ------------------------------------------------------------
  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Number of signals at level l of a tree with n leaves: level 0 is the
  // inputs, level l+1 has ceil(n_l / fanin) LUT nodes.
  function automatic int unsigned tree_width(int unsigned n, int unsigned fanin,
                                             int unsigned l);
    int unsigned w = n;
    for (int unsigned k = 0; k < l; k++) w = ceil_div(w, fanin);
    return w;
  endfunction

  // Number of LUT levels (inner layers) needed to reduce n signals to one.
  // A single input still gets one LUT so that the neuron always has a table.
  function automatic int unsigned tree_levels(int unsigned n, int unsigned fanin);
    int unsigned w = n;
    int unsigned l = 0;
    do begin
      w = ceil_div(w, fanin);
      l++;
    end while (w > 1);
    return l;
  endfunction

  // Index of the first LUT of level l (l >= 1) when the LUTs of all levels
  // are numbered level by level, first level first.
  function automatic int unsigned tree_lut_base(int unsigned n, int unsigned fanin,
                                                int unsigned l);
    int unsigned s = 0;
    for (int unsigned k = 1; k < l; k++) s += tree_width(n, fanin, k);
    return s;
  endfunction

  // Total LUT nodes in one Dtree neuron with n inputs.
  function automatic int unsigned tree_luts(int unsigned n, int unsigned fanin);
    return tree_lut_base(n, fanin, tree_levels(n, fanin) + 1);
  endfunction

endpackage
