// tb_dtnn_classifier: end-to-end test of the LUT-only classifier.
//
// Two classifiers run side by side on the same image stream: one with a
// reduced hidden layer (N_HID = 12, the 784-N-10 structure of the larger
// classifier) and one with no hidden layer (N_HID = 0, the 784-10 structure).
// All tables are loaded through the cfg port from a hash of their address,
// images are random 8-bit pixels with many set exactly at a threshold, and
// every output is compared with a software model of binarisation, Dtree
// neurons and combiner. Midway, the combiner tables of both classifiers are
// reloaded with a different function while images are still in flight
// (reconfiguration between two networks).
//
// Counted events, each of which must occur: images accepted on back-to-back
// cycles, idle cycles inside the stream, pixels equal to a threshold,
// reconfigurations, class bits seen at 1 and at 0. Latency must be 4 cycles
// (3 without hidden layer) and one image is accepted per cycle.
module tb_dtnn_classifier;
  import dtnn_pkg::*;
  import dtnn_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NH = 12;

  logic rst_n, iv, ov_a, ov_b;
  logic [7:0] pix [N_PIX];
  logic [9:0] y_a, y_b;
  cfg_t cfg;

  dtnn_classifier #(.N_HID(NH)) dut_a (.clk(clk), .rst_n(rst_n), .in_valid(iv), .pix(pix),
    .out_valid(ov_a), .class_bits(y_a), .cfg(cfg));
  dtnn_classifier #(.N_HID(0)) dut_b (.clk(clk), .rst_n(rst_n), .in_valid(iv), .pix(pix),
    .out_valid(ov_b), .class_bits(y_b), .cfg(cfg));

  logic [7:0] thr[];
  int n_b2b = 0, n_idle = 0, n_edge = 0, n_reconf = 0, n_one = 0, n_zero = 0;

  // Load every table of a classifier with N_HID = nhid. dut_a and dut_b see
  // the same port, so member tables are written with the seed of the shape
  // that the index belongs to: both shapes use seed 1, and an output-layer
  // LUT index valid in both shapes gets the table of the last write.
  task automatic write(int m, cfg_layer_e l, int n, int k, logic [63:0] d);
    @(negedge clk);
    cfg.we = 1; cfg.member = 3'(m); cfg.layer = l; cfg.neuron = 8'(n); cfg.lut = 8'(k); cfg.data = d;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected results, one entry per cycle, for both latencies.
  logic [9:0] qa[$], qb[$];
  logic       va[$], vb[$];

  initial begin
    int unsigned cseed;
    logic [7:0] p[];
    thr = new[5];
    thr[0] = 51; thr[1] = 102; thr[2] = 128; thr[3] = 153; thr[4] = 204;
    rst_n = 0; iv = 0; cfg = '0;
    for (int i = 0; i < N_PIX; i++) pix[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // dut_a hidden layers (dut_b ignores hidden writes)
    for (int m = 0; m < 5; m++)
      for (int n = 0; n < NH; n++)
        for (int k = 0; k < 158; k++) write(m, CFG_HIDDEN, n, k, tbl_of(1, m, 0, n, k));
    // Output layers: dut_a's neurons have 3 LUTs (12 -> 2 -> 1), dut_b's 158.
    // Indices 0..2 are written with seed 1 for both; dut_b's reference is
    // built from the same addresses, so the two shapes share those tables.
    for (int m = 0; m < 5; m++)
      for (int c = 0; c < 10; c++)
        for (int k = 0; k < 158; k++) write(m, CFG_OUTPUT, c, k, tbl_of(1, m, 1, c, k));
    cseed = 7;
    for (int c = 0; c < 10; c++) write(0, CFG_COMBINER, c, 0, tbl_of(cseed, 0, 2, c, 0));
    @(negedge clk); cfg.we = 0;

    p = new[N_PIX];
    for (int it = 0; it < 120; it++) begin
      logic prev_iv;
      @(negedge clk);
      prev_iv = iv;
      // reconfigure the combiners midway while images are in flight
      if (it == 60) begin
        cseed = 8;
        for (int c = 0; c < 10; c++) begin
          cfg.we = 1; cfg.member = 0; cfg.layer = CFG_COMBINER; cfg.neuron = 8'(c);
          cfg.lut = 0; cfg.data = tbl_of(cseed, 0, 2, c, 0);
          iv = 0; qa.push_back('0); va.push_back(0); qb.push_back('0); vb.push_back(0);
          @(negedge clk);
        end
        cfg.we = 0;
        n_reconf++;
        // drain the pipeline so no image straddles the change
        repeat (5) begin
          iv = 0; qa.push_back('0); va.push_back(0); qb.push_back('0); vb.push_back(0);
          @(negedge clk);
        end
      end
      iv = (it % 7 != 3);
      if (iv && prev_iv) n_b2b++;
      if (!iv) n_idle++;
      for (int i = 0; i < N_PIX; i++) begin
        if ($urandom_range(9) == 0) begin p[i] = thr[$urandom_range(4)]; n_edge++; end
        else p[i] = 8'($urandom);
        pix[i] = p[i];
      end
      qa.push_back(iv ? ref_classifier(1, cseed, NH, p, thr) : '0); va.push_back(iv);
      qb.push_back(iv ? ref_classifier(1, cseed, 0, p, thr) : '0);  vb.push_back(iv);
    end
    repeat (8) begin
      iv = 0; qa.push_back('0); va.push_back(0); qb.push_back('0); vb.push_back(0); @(negedge clk);
    end
    // event counts
    checks += 6;
    if (n_b2b == 0)    begin failures++; $display("ERR no back-to-back images"); end
    if (n_idle == 0)   begin failures++; $display("ERR no idle cycles"); end
    if (n_edge == 0)   begin failures++; $display("ERR no threshold-edge pixels"); end
    if (n_reconf == 0) begin failures++; $display("ERR no reconfiguration"); end
    if (n_one == 0)    begin failures++; $display("ERR no class bit at 1"); end
    if (n_zero == 0)   begin failures++; $display("ERR no class bit at 0"); end
    $display("events: back-to-back=%0d idle=%0d edge-pixels=%0d reconfig=%0d ones=%0d zeros=%0d",
             n_b2b, n_idle, n_edge, n_reconf, n_one, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: the entry pushed during the cycle that ends at edge t is
  // due at the edge t+4 (dut_a) or t+3 (dut_b).
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && va.size() > 4) begin
      logic e_v; logic [9:0] e_y;
      e_v = va.pop_front(); e_y = qa.pop_front();
      checks++;
      if (ov_a !== e_v) begin failures++; if (failures < 10) $display("ERR a valid at %0d", cyc); end
      if (e_v) begin
        checks++;
        for (int c = 0; c < 10; c++) if (y_a[c]) n_one++; else n_zero++;
        if (y_a !== e_y) begin failures++; if (failures < 10) $display("ERR a y %h exp %h", y_a, e_y); end
      end
    end
    if (rst_n && vb.size() > 3) begin
      logic e_v; logic [9:0] e_y;
      e_v = vb.pop_front(); e_y = qb.pop_front();
      checks++;
      if (ov_b !== e_v) begin failures++; if (failures < 10) $display("ERR b valid at %0d", cyc); end
      if (e_v) begin
        checks++;
        if (y_b !== e_y) begin failures++; if (failures < 10) $display("ERR b y %h exp %h", y_b, e_y); end
      end
    end
  end
endmodule
