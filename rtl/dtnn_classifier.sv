// dtnn_classifier: MNIST digit classifier built only from lookup tables.
//
// Datapath, one image per clock, fully pipelined:
//   stage 1  input_binarizer   784 pixels -> 5 binary images, one per threshold
//   stage 2  hidden layers     5 members x 216 Dtree neurons (absent if N_HID=0)
//   stage 3  output layers     5 members x 10 Dtree neurons
//   stage 4  ensemble_combiner 10 Dtree neurons, one per class, over 5 votes
// Latency from in_valid to out_valid is 4 cycles (3 with N_HID = 0). The
// default is the larger classifier (784-216-10); N_HID = 0 gives the smaller
// one (784-10). Every neuron is a tree of 6-input LUTs: with the defaults the
// design holds 5*(216*158 + 10*43) + 10 = 172,800 LUT tables.
//
// Interface: pix[p] is pixel p as an 8-bit code; class_bits[c] is the final
// binary output of class c. The network's trained function lives entirely in
// the LUT tables, loaded through cfg (one 64-bit table per clock, addressed by
// member, layer, neuron and LUT, see dtnn_pkg). Writing while images flow is
// allowed; an image in flight sees whichever table is present when it passes.
//
// Following the paper: binarised input at five thresholds, ensemble of five
// MLPs, per-class combiner, 6-input LUT nodes, the layer sizes. Own choice:
// pixel width, a register after every layer, the configuration port, and
// leaving the choice of a single winning class (the paper does not say how
// the ten class bits are turned into one answer) to whatever reads
// class_bits.
module dtnn_classifier
  import dtnn_pkg::*;
#(
  parameter int unsigned N_HID = N_HIDDEN
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [PIX_W-1:0]   pix [N_PIX],
  output logic               out_valid,
  output logic [N_CLASS-1:0] class_bits,
  input  cfg_t               cfg
);

  logic               bin_valid;
  logic [N_PIX-1:0]   bin [N_ENS];
  logic [N_ENS-1:0]   mem_valid;
  logic [N_CLASS-1:0] votes [N_ENS];

  input_binarizer u_binarizer (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .pix      (pix),
    .out_valid(bin_valid),
    .bits     (bin)
  );

  for (genvar m = 0; m < N_ENS; m++) begin : g_member
    dtnn_mlp #(.N_IN(N_PIX), .N_HID(N_HID), .N_CLS(N_CLASS)) u_mlp (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (bin_valid),
      .x        (bin[m]),
      .out_valid(mem_valid[m]),
      .y        (votes[m]),
      .cfg      (cfg),
      .cfg_sel  (32'(cfg.member) == m)
    );
  end

  ensemble_combiner u_combiner (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (mem_valid[0]),
    .votes     (votes),
    .out_valid (out_valid),
    .y         (class_bits),
    .cfg_we    (cfg.we && (cfg.layer == CFG_COMBINER)),
    .cfg_neuron(cfg.neuron),
    .cfg_lut   (cfg.lut),
    .cfg_data  (cfg.data)
  );

  // All members run in lockstep.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_valid == {N_ENS{mem_valid[0]}});

endmodule
