// tb_dtree_neuron: checks Dtree neurons of three shapes against the reference
// tree model: the classifier's 784-input binary neuron (131+22+4+1 = 158
// LUTs), a 5-input neuron that is a single LUT with one padded input, and a
// 37-input neuron of 3-input nodes with 2-bit activations. Each neuron's
// tables are written through its port with random contents, then random
// inputs are applied and the output compared. A write to an out-of-range LUT
// index must change nothing.
module tb_dtree_neuron;
  import dtnn_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // A: 784 inputs, 6-LUTs
  logic [783:0] xa;  logic ya;  logic wea;  logic [7:0] la;  logic [63:0] da;
  dtree_neuron #(.N_IN(784), .FANIN(6), .ACT_W(1)) dut_a (
    .clk(clk), .x(xa), .y(ya), .cfg_we(wea), .cfg_lut(la), .cfg_data(da));
  // B: 5 inputs, one LUT
  logic [4:0] xb;  logic yb;  logic web;  logic [7:0] lb;  logic [63:0] db;
  dtree_neuron #(.N_IN(5), .FANIN(6), .ACT_W(1)) dut_b (
    .clk(clk), .x(xb), .y(yb), .cfg_we(web), .cfg_lut(lb), .cfg_data(db));
  // C: 37 inputs of 2 bits, 3-input nodes
  logic [73:0] xc;  logic [1:0] yc;  logic wec;  logic [7:0] lc;  logic [127:0] dc;
  dtree_neuron #(.N_IN(37), .FANIN(3), .ACT_W(2)) dut_c (
    .clk(clk), .x(xc), .y(yc), .cfg_we(wec), .cfg_lut(lc), .cfg_data(dc));

  tbl_t ta[], tb_[], tc[];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("ERR %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    int unsigned na, nb, nc;
    wea = 0; web = 0; wec = 0; la = 0; lb = 0; lc = 0; da = '0; db = '0; dc = '0;
    xa = '0; xb = '0; xc = '0;
    na = ref_num_luts(784, 6); nb = ref_num_luts(5, 6); nc = ref_num_luts(37, 3);
    check("LUT count 784/6", na, 158);
    check("LUT count 5/6", nb, 1);
    check("LUT count 37/3", nc, 13 + 5 + 2 + 1);
    ta = new[na]; tb_ = new[nb]; tc = new[nc];
    for (int k = 0; k < na; k++) ta[k] = tbl_t'({$urandom, $urandom});
    for (int k = 0; k < nb; k++) tb_[k] = tbl_t'({$urandom, $urandom});
    for (int k = 0; k < nc; k++) tc[k] = tbl_t'({$urandom, $urandom, $urandom, $urandom});
    // write all tables
    for (int k = 0; k < na; k++) begin
      @(negedge clk);
      wea = 1; la = 8'(k); da = ta[k][63:0];
      web = (k < nb); lb = 8'(k); db = tb_[k < nb ? k : 0][63:0];
      wec = (k < nc); lc = 8'(k); dc = tc[k < nc ? k : 0][127:0];
    end
    // out-of-range writes are ignored
    @(negedge clk);
    wea = 1; la = 8'(na); da = '1;
    web = 1; lb = 8'(nb); db = '1;
    wec = 1; lc = 8'(nc); dc = '1;
    @(negedge clk);
    wea = 0; web = 0; wec = 0;
    for (int it = 0; it < 400; it++) begin
      int unsigned va[], vb[], vc[];
      va = new[784]; vb = new[5]; vc = new[37];
      for (int i = 0; i < 784; i++) begin va[i] = $urandom_range(1); xa[i] = va[i][0]; end
      for (int i = 0; i < 5; i++)   begin vb[i] = $urandom_range(1); xb[i] = vb[i][0]; end
      for (int i = 0; i < 37; i++)  begin vc[i] = $urandom_range(3); xc[2*i +: 2] = vc[i][1:0]; end
      @(negedge clk);
      check("A", int'(ya), ref_tree(784, 6, 1, va, ta));
      check("B", int'(yb), ref_tree(5, 6, 1, vb, tb_));
      check("C", int'(yc), ref_tree(37, 3, 2, vc, tc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
