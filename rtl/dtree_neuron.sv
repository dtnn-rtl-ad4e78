// dtree_neuron: a neuron with N_IN inputs built as a dendrite tree of LUT
// nodes.
//
// A single lookup table cannot cover thousands of inputs (its size doubles
// per input), so the neuron is split into inner layers. Level 1 has
// ceil(N_IN/FANIN) nodes, each looking up FANIN consecutive inputs; level 2
// groups the level-1 outputs FANIN at a time, and so on until one node, the
// neuron output, is left. Where a level's width is not a multiple of FANIN the
// last node gets the remainder and its unused index bits are tied to 0. For
// the classifier's 784-input neurons with 6-input nodes this gives levels of
// 131, 22, 4 and 1 nodes, 158 LUTs in all.
//
// The tables of all N_LUT nodes sit in a small register file inside the
// neuron. LUTs are numbered level by level: level 1 nodes first (node k of
// level 1 is LUT k), then level 2, and so on; the root is LUT N_LUT-1. One
// whole table is written per clock through cfg_we / cfg_lut / cfg_data;
// out-of-range indices are ignored. The tables are not reset: they must be
// written before use.
//
// Timing: the tree is combinational from x (and the tables) to y; the layer
// that instantiates the neuron registers y. A table write takes effect on the
// clock edge.
//
// Following the paper: the tree shape (Fig. 2b: ceil(n/i) first-level nodes,
// the last one taking n mod i inputs) and LUT nodes in place of arithmetic.
// The paper's formula for the number of inner layers, floor(log_i n), gives 3
// for 784 inputs and fan-in 6, whereas reducing by ceil(n/i) until a single
// node is left, as the figure draws, needs 4; this design follows the figure.
// Own choice: the table store and its write port, input grouping by
// consecutive index, and zero padding of short nodes.
module dtree_neuron
  import dtnn_pkg::*;
#(
  parameter int unsigned N_IN   = 784,
  parameter int unsigned FANIN  = DT_FANIN,
  parameter int unsigned ACT_W  = 1,
  parameter int unsigned LUT_AW = 8,          // width of the LUT index port
  localparam int unsigned N_LVL = tree_levels(N_IN, FANIN),
  localparam int unsigned N_LUT = tree_luts(N_IN, FANIN),
  localparam int unsigned IDX_W = FANIN * ACT_W,
  localparam int unsigned TBL_W = ACT_W << IDX_W
) (
  input  logic                    clk,
  input  logic [N_IN*ACT_W-1:0]   x,
  output logic [ACT_W-1:0]        y,
  // table write port
  input  logic                    cfg_we,
  input  logic [LUT_AW-1:0]       cfg_lut,
  input  logic [TBL_W-1:0]        cfg_data
);

  // Table store.
  localparam int unsigned SEL_W = (N_LUT > 1) ? $clog2(N_LUT) : 1;
  logic [TBL_W-1:0] tbl [N_LUT];
  logic [SEL_W-1:0] sel;

  assign sel = SEL_W'(cfg_lut);

  always_ff @(posedge clk) begin
    if (cfg_we && (32'(cfg_lut) < N_LUT)) tbl[sel] <= cfg_data;
  end

  // All signals of the tree: the N_IN inputs, then the LUT outputs in LUT
  // order. Signal s is at sig[s*ACT_W +: ACT_W].
  localparam int unsigned N_SIG = N_IN + N_LUT;
  logic [N_SIG*ACT_W-1:0] sig;

  assign sig[N_IN*ACT_W-1:0] = x;

  for (genvar l = 1; l <= N_LVL; l++) begin : g_level
    localparam int unsigned W_PREV = tree_width(N_IN, FANIN, l - 1);
    localparam int unsigned W_THIS = tree_width(N_IN, FANIN, l);
    // First signal of the previous level and of this level.
    localparam int unsigned S_PREV = (l == 1) ? 0 : N_IN + tree_lut_base(N_IN, FANIN, l - 1);
    localparam int unsigned L_THIS = tree_lut_base(N_IN, FANIN, l);

    for (genvar k = 0; k < W_THIS; k++) begin : g_node
      logic [IDX_W-1:0] idx;
      for (genvar j = 0; j < FANIN; j++) begin : g_in
        if (k * FANIN + j < W_PREV) begin : g_used
          assign idx[j*ACT_W +: ACT_W] = sig[(S_PREV + k*FANIN + j)*ACT_W +: ACT_W];
        end else begin : g_pad
          assign idx[j*ACT_W +: ACT_W] = '0;
        end
      end
      dtnn_lut #(.FANIN(FANIN), .ACT_W(ACT_W)) u_lut (
        .x  (idx),
        .tbl(tbl[L_THIS + k]),
        .y  (sig[(N_IN + L_THIS + k)*ACT_W +: ACT_W])
      );
    end
  end

  assign y = sig[(N_SIG-1)*ACT_W +: ACT_W];

endmodule
