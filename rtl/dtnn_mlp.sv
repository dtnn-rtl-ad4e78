// dtnn_mlp: one member of the classifier's MLP ensemble.
//
// The member maps the binarised image (N_IN bits) to one bit per class. With
// N_HID > 0 (the larger classifier, 784-216-10) the image first goes through a
// hidden layer of N_HID Dtree neurons, whose registered outputs feed an output
// layer of N_CLS Dtree neurons. With N_HID = 0 (the smaller classifier,
// 784-10) the output layer reads the image directly. Each layer is one
// pipeline stage: latency 2 cycles with a hidden layer, 1 without, and a new
// image is accepted every cycle.
//
// Interface: x is the binarised image with its valid flag, y the class bits.
// cfg is the classifier-wide write port and cfg_sel says that it addresses
// this member; cfg.layer then chooses the hidden (CFG_HIDDEN) or output
// (CFG_OUTPUT) layer. With N_HID = 0 hidden-layer writes are ignored.
//
// Following the paper: the two MLP structures and their Dtree neurons.
// Own choice: one register per layer, the configuration addressing.
module dtnn_mlp
  import dtnn_pkg::*;
#(
  parameter int unsigned N_IN  = N_PIX,
  parameter int unsigned N_HID = N_HIDDEN,
  parameter int unsigned N_CLS = N_CLASS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N_IN-1:0]  x,
  output logic             out_valid,
  output logic [N_CLS-1:0] y,
  input  cfg_t             cfg,
  input  logic             cfg_sel
);

  logic cfg_out_we;
  assign cfg_out_we = cfg_sel && cfg.we && (cfg.layer == CFG_OUTPUT);

  if (N_HID > 0) begin : g_hidden
    logic              hid_valid;
    logic [N_HID-1:0]  hid;

    dtnn_fc_layer #(.N_IN(N_IN), .N_OUT(N_HID)) u_hidden (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .x         (x),
      .out_valid (hid_valid),
      .y         (hid),
      .cfg_we    (cfg_sel && cfg.we && (cfg.layer == CFG_HIDDEN)),
      .cfg_neuron(cfg.neuron),
      .cfg_lut   (cfg.lut),
      .cfg_data  (cfg.data)
    );

    dtnn_fc_layer #(.N_IN(N_HID), .N_OUT(N_CLS)) u_output (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (hid_valid),
      .x         (hid),
      .out_valid (out_valid),
      .y         (y),
      .cfg_we    (cfg_out_we),
      .cfg_neuron(cfg.neuron),
      .cfg_lut   (cfg.lut),
      .cfg_data  (cfg.data)
    );
  end else begin : g_direct
    dtnn_fc_layer #(.N_IN(N_IN), .N_OUT(N_CLS)) u_output (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .x         (x),
      .out_valid (out_valid),
      .y         (y),
      .cfg_we    (cfg_out_we),
      .cfg_neuron(cfg.neuron),
      .cfg_lut   (cfg.lut),
      .cfg_data  (cfg.data)
    );
  end

endmodule
