// dtnn_fc_layer: a fully connected DTNN layer.
//
// Every one of the N_OUT outputs is a Dtree neuron that sees the whole input
// vector x; what each neuron computes is fixed only by its LUT tables. Since
// nothing is fetched from memory and nothing is accumulated, the layer takes a
// new input vector every clock. The neuron outputs are registered together
// with the valid flag, so the layer is one pipeline stage with latency 1.
//
// Interface: x[i] is binary input i (activations are 1 bit in the classifier).
// y[n] is the registered output of neuron n. cfg_we/cfg_neuron/cfg_lut/
// cfg_data write the table of LUT cfg_lut in neuron cfg_neuron (numbering as
// in dtree_neuron); an out-of-range neuron index writes nothing.
//
// Following the paper: a fully connected layer is obtained by replacing each
// neuron with a Dtree neuron. Own choice: the output register as pipeline
// stage, the write port.
module dtnn_fc_layer
  import dtnn_pkg::*;
#(
  parameter int unsigned N_IN   = 784,
  parameter int unsigned N_OUT  = 216,
  parameter int unsigned FANIN  = DT_FANIN,
  parameter int unsigned NEU_AW = 8,
  parameter int unsigned LUT_AW = 8,
  localparam int unsigned TBL_W = 1 << FANIN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N_IN-1:0]   x,
  output logic              out_valid,
  output logic [N_OUT-1:0]  y,
  input  logic              cfg_we,
  input  logic [NEU_AW-1:0] cfg_neuron,
  input  logic [LUT_AW-1:0] cfg_lut,
  input  logic [TBL_W-1:0]  cfg_data
);

  logic [N_OUT-1:0] y_comb;

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    dtree_neuron #(.N_IN(N_IN), .FANIN(FANIN), .ACT_W(1), .LUT_AW(LUT_AW)) u_neuron (
      .clk     (clk),
      .x       (x),
      .y       (y_comb[n]),
      .cfg_we  (cfg_we && (32'(cfg_neuron) == n)),
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
