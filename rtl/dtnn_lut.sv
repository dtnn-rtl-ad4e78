// dtnn_lut: one lookup-table node of a Dtree neuron.
//
// A node with FANIN inputs of ACT_W bits each realises any function of those
// inputs by table lookup instead of multiply-and-add: the concatenated inputs
// form an index into a table of 2^(FANIN*ACT_W) entries of ACT_W bits, and the
// selected entry is the node's output activation. With binary activations
// (ACT_W = 1) and FANIN = 6 this is exactly an FPGA 6-input LUT, the node the
// paper's classifiers are built from; the weights, bias and activation
// function of the node are all folded into the table contents.
//
// Interface: x is the input vector, input j in x[j*ACT_W +: ACT_W], input 0 is
// the least significant part of the index. tbl holds entry k in
// tbl[k*ACT_W +: ACT_W]. y is combinational, no clock.
//
// Following the paper: the table-of-b*2^n-bits node. Own choice: the index
// bit order and the generalisation to ACT_W-bit activations.
module dtnn_lut #(
  parameter int unsigned FANIN = 6,
  parameter int unsigned ACT_W = 1,
  localparam int unsigned IDX_W = FANIN * ACT_W,
  localparam int unsigned TBL_W = ACT_W << IDX_W
) (
  input  logic [IDX_W-1:0] x,
  input  logic [TBL_W-1:0] tbl,
  output logic [ACT_W-1:0] y
);

  always_comb y = tbl[x * ACT_W +: ACT_W];

endmodule
