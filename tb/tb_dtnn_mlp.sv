// tb_dtnn_mlp: checks one ensemble member in both of its shapes, with a
// hidden layer (60 inputs, 9 hidden, 4 classes) and without (60 inputs, 4
// classes), against a two-stage reference built from the tree model. Tables
// are written through the classifier-wide cfg port; writes with cfg_sel low,
// or to the hidden layer of the member that has none, must change nothing.
// Inputs stream one per cycle with idle gaps; the latency must be 2 cycles
// with the hidden layer and 1 without.
module tb_dtnn_mlp;
  import dtnn_pkg::*;
  import dtnn_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 60, NH = 9, NC = 4;

  logic rst_n, iv;
  logic [NI-1:0] x;
  logic ov2, ov1;
  logic [NC-1:0] y2, y1;
  cfg_t cfg;
  logic sel2, sel1;

  dtnn_mlp #(.N_IN(NI), .N_HID(NH), .N_CLS(NC)) dut2 (
    .clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .out_valid(ov2), .y(y2),
    .cfg(cfg), .cfg_sel(sel2));
  dtnn_mlp #(.N_IN(NI), .N_HID(0), .N_CLS(NC)) dut1 (
    .clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .out_valid(ov1), .y(y1),
    .cfg(cfg), .cfg_sel(sel1));

  // seeds: 10 = dut2 hidden, 11 = dut2 output, 20 = dut1 output
  function automatic logic ref_neuron(int seed, int n, int nin, int unsigned v[]);
    tbl_t tt[];
    int nl = ref_num_luts(nin, 6);
    tt = new[nl];
    for (int k = 0; k < nl; k++) tt[k] = tbl_t'(tbl_of(seed, 0, 0, n, k));
    return ref_tree(nin, 6, 1, v, tt) != 0;
  endfunction

  task automatic write(logic s2, logic s1, cfg_layer_e layer, int n, int k, logic [63:0] d);
    @(negedge clk);
    sel2 = s2; sel1 = s1;
    cfg.we = 1; cfg.member = 0; cfg.layer = layer;
    cfg.neuron = 8'(n); cfg.lut = 8'(k); cfg.data = d;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NC-1:0] e2q[$], e1q[$];
    logic vq2[$], vq1[$];
    rst_n = 0; iv = 0; x = 0; cfg = '0; sel2 = 0; sel1 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NH; n++)
      for (int k = 0; k < ref_num_luts(NI, 6); k++)
        write(1, 0, CFG_HIDDEN, n, k, tbl_of(10, 0, 0, n, k));
    for (int n = 0; n < NC; n++)
      for (int k = 0; k < ref_num_luts(NH, 6); k++)
        write(1, 0, CFG_OUTPUT, n, k, tbl_of(11, 0, 0, n, k));
    for (int n = 0; n < NC; n++)
      for (int k = 0; k < ref_num_luts(NI, 6); k++)
        write(0, 1, CFG_OUTPUT, n, k, tbl_of(20, 0, 0, n, k));
    // writes that must be ignored: not selected, or hidden layer of dut1
    for (int n = 0; n < NC; n++)
      for (int k = 0; k < ref_num_luts(NI, 6); k++) begin
        write(0, 0, CFG_OUTPUT, n, k, ~tbl_of(20, 0, 0, n, k));
        write(0, 1, CFG_HIDDEN, n, k, ~tbl_of(20, 0, 0, n, k));
      end
    @(negedge clk); cfg.we = 0;
    // pipeline: expected outputs queued per cycle
    for (int it = 0; it < 400; it++) begin
      int unsigned v[], h[];
      logic [NC-1:0] e2, e1;
      @(negedge clk);
      iv = (it < 396) && ($urandom_range(4) != 0);
      v = new[NI];
      for (int i = 0; i < NI; i++) begin v[i] = $urandom_range(1); x[i] = v[i][0]; end
      h = new[NH];
      for (int n = 0; n < NH; n++) h[n] = ref_neuron(10, n, NI, v);
      for (int c = 0; c < NC; c++) begin
        e2[c] = ref_neuron(11, c, NH, h);
        e1[c] = ref_neuron(20, c, NI, v);
      end
      e2q.push_back(e2); vq2.push_back(iv);
      e1q.push_back(e1); vq1.push_back(iv);
      @(posedge clk); #1;
      // dut1: latency 1 -> result of this cycle's input
      begin
        logic ev1; logic [NC-1:0] ex1;
        ev1 = vq1.pop_front(); ex1 = e1q.pop_front();
        checks++;
        if (ov1 !== ev1) begin failures++; $display("ERR dut1 valid"); end
        if (ev1) begin
          checks++;
          if (y1 !== ex1) begin failures++; if (failures < 10) $display("ERR dut1 y %h exp %h", y1, ex1); end
        end
      end
      // dut2: latency 2 -> result of previous cycle's input
      if (vq2.size() == 2) begin
        logic ev2; logic [NC-1:0] ex2;
        ev2 = vq2.pop_front(); ex2 = e2q.pop_front();
        checks++;
        if (ov2 !== ev2) begin failures++; $display("ERR dut2 valid"); end
        if (ev2) begin
          checks++;
          if (y2 !== ex2) begin failures++; if (failures < 10) $display("ERR dut2 y %h exp %h", y2, ex2); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
