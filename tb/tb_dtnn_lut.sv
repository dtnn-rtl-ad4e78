// tb_dtnn_lut: checks the LUT node against direct table indexing, for the
// classifier's binary 6-input node and for a 3-input node with 2-bit
// activations. Random tables and random inputs; the expected output is
// computed bit by bit from the index formula.
module tb_dtnn_lut;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [5:0]   x1;
  logic [63:0]  t1;
  logic         y1;
  logic [5:0]   x2;
  logic [127:0] t2;
  logic [1:0]   y2;

  dtnn_lut #(.FANIN(6), .ACT_W(1)) dut1 (.x(x1), .tbl(t1), .y(y1));
  dtnn_lut #(.FANIN(3), .ACT_W(2)) dut2 (.x(x2), .tbl(t2), .y(y2));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int unsigned e1, e2, idx2;
      t1 = {$urandom, $urandom};
      t2 = {$urandom, $urandom, $urandom, $urandom};
      x1 = 6'($urandom);
      x2 = 6'($urandom);
      @(posedge clk);
      e1 = t1[int'(x1)];
      // index of the 2-bit node: input j is x2[2j+1:2j], weight 4^j
      idx2 = x2[1:0] + 4 * x2[3:2] + 16 * x2[5:4];
      e2 = {t2[2*idx2+1], t2[2*idx2]};
      checks++;
      if (y1 !== e1[0]) begin
        failures++;
        if (failures < 10) $display("ERR 6-LUT x=%0d got %0d exp %0d", x1, y1, e1);
      end
      checks++;
      if (y2 !== 2'(e2)) begin
        failures++;
        if (failures < 10) $display("ERR 2b-LUT x=%0h got %0d exp %0d", x2, y2, e2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
