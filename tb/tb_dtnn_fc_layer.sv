// tb_dtnn_fc_layer: checks a fully connected layer of Dtree neurons (50
// inputs, 7 neurons, and a second layer with the 216-neuron width of the
// classifier's hidden layer reading 30 inputs) against the reference tree
// model. All tables are written through the layer's port, including a write
// to an out-of-range neuron that must change nothing. Input vectors are then
// streamed one per cycle with random idle cycles; each result must appear
// one cycle after its input.
module tb_dtnn_fc_layer;
  import dtnn_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI1 = 50, NO1 = 7, NI2 = 30, NO2 = 216;

  logic rst_n, iv, ov1, ov2, we1, we2;
  logic [NI1-1:0] x1;  logic [NO1-1:0] y1;
  logic [NI2-1:0] x2;  logic [NO2-1:0] y2;
  logic [7:0] neu, lut;  logic [63:0] dat;

  dtnn_fc_layer #(.N_IN(NI1), .N_OUT(NO1)) dut1 (
    .clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x1), .out_valid(ov1), .y(y1),
    .cfg_we(we1), .cfg_neuron(neu), .cfg_lut(lut), .cfg_data(dat));
  dtnn_fc_layer #(.N_IN(NI2), .N_OUT(NO2)) dut2 (
    .clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x2), .out_valid(ov2), .y(y2),
    .cfg_we(we2), .cfg_neuron(neu), .cfg_lut(lut), .cfg_data(dat));

  int unsigned nl1, nl2;
  function automatic tbl_t t1(int n, int k); return tbl_t'(tbl_of(1, 0, 0, n, k)); endfunction
  function automatic tbl_t t2(int n, int k); return tbl_t'(tbl_of(2, 0, 0, n, k)); endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NO1-1:0] e1;
    logic [NO2-1:0] e2;
    logic ev;
    tbl_t tt[];
    rst_n = 0; iv = 0; we1 = 0; we2 = 0; neu = 0; lut = 0; dat = 0; x1 = 0; x2 = 0;
    nl1 = ref_num_luts(NI1, 6); nl2 = ref_num_luts(NI2, 6);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NO1; n++)
      for (int k = 0; k < nl1; k++) begin
        @(negedge clk); we1 = 1; neu = 8'(n); lut = 8'(k); dat = t1(n, k)[63:0];
      end
    @(negedge clk); we1 = 1; neu = 8'(NO1); lut = 0; dat = '0;   // ignored
    we1 = 1;
    for (int n = 0; n < NO2; n++)
      for (int k = 0; k < nl2; k++) begin
        @(negedge clk); we1 = 0; we2 = 1; neu = 8'(n); lut = 8'(k); dat = t2(n, k)[63:0];
      end
    @(negedge clk); we2 = 0;
    for (int it = 0; it < 300; it++) begin
      int unsigned v1[], v2[];
      @(negedge clk);
      iv = ($urandom_range(4) != 0);
      v1 = new[NI1]; v2 = new[NI2];
      for (int i = 0; i < NI1; i++) begin v1[i] = $urandom_range(1); x1[i] = v1[i][0]; end
      for (int i = 0; i < NI2; i++) begin v2[i] = $urandom_range(1); x2[i] = v2[i][0]; end
      for (int n = 0; n < NO1; n++) begin
        tt = new[nl1];
        for (int k = 0; k < nl1; k++) tt[k] = t1(n, k);
        e1[n] = ref_tree(NI1, 6, 1, v1, tt) != 0;
      end
      for (int n = 0; n < NO2; n++) begin
        tt = new[nl2];
        for (int k = 0; k < nl2; k++) tt[k] = t2(n, k);
        e2[n] = ref_tree(NI2, 6, 1, v2, tt) != 0;
      end
      ev = iv;
      @(posedge clk); #1;
      checks++;
      if (ov1 !== ev || ov2 !== ev) begin failures++; $display("ERR valid"); end
      if (ev) begin
        checks += 2;
        if (y1 !== e1) begin failures++; if (failures < 10) $display("ERR y1 %h exp %h", y1, e1); end
        if (y2 !== e2) begin failures++; if (failures < 10) $display("ERR y2 mismatch"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
