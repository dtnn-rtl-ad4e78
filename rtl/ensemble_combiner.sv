// ensemble_combiner: reduces the ensemble's N_MEM votes per class to one bit.
//
// Each ensemble member gives one bit per class. For each class a binarised
// linear function of the N_MEM member bits gives the final class bit; that
// function is itself a Dtree neuron of FANIN-input LUT nodes, so with 5
// members and 6-input nodes it is a single LUT per class whose sixth index bit
// is tied to 0. What the function is (a vote, a weighted threshold) is set by
// the table written at run time.
//
// Interface: votes[m][c] is member m's bit for class c; y[c] the final bit of
// class c, registered with out_valid (latency 1, one image per cycle). The
// write port addresses neuron cfg_neuron = class and cfg_lut inside it.
//
// Following the paper: one binarised linear function per class, learnt with
// the ensemble and built as a Dtree neuron of fixed 6-input nodes. Own
// choice: the output register, the write port.
module ensemble_combiner
  import dtnn_pkg::*;
#(
  parameter int unsigned N_MEM  = N_ENS,
  parameter int unsigned N_CLS  = N_CLASS,
  parameter int unsigned FANIN  = DT_FANIN,
  localparam int unsigned TBL_W = 1 << FANIN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N_CLS-1:0] votes [N_MEM],
  output logic             out_valid,
  output logic [N_CLS-1:0] y,
  input  logic             cfg_we,
  input  logic [7:0]       cfg_neuron,
  input  logic [7:0]       cfg_lut,
  input  logic [TBL_W-1:0] cfg_data
);

  logic [N_CLS-1:0] y_comb;

  for (genvar c = 0; c < N_CLS; c++) begin : g_class
    logic [N_MEM-1:0] col;
    for (genvar m = 0; m < N_MEM; m++) begin : g_member
      assign col[m] = votes[m][c];
    end
    dtree_neuron #(.N_IN(N_MEM), .FANIN(FANIN), .ACT_W(1), .LUT_AW(8)) u_neuron (
      .clk     (clk),
      .x       (col),
      .y       (y_comb[c]),
      .cfg_we  (cfg_we && (32'(cfg_neuron) == c)),
      .cfg_lut (cfg_lut),
      .cfg_data(cfg_data)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_comb;
    end
  end

endmodule
