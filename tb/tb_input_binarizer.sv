// tb_input_binarizer: checks the five-threshold binarisation of a full
// 784-pixel image. Pixels are random, with many set exactly to a threshold or
// one above it, where "strictly greater" matters. Images are streamed on
// consecutive cycles with idle gaps; every output must appear exactly one
// cycle after its input, with out_valid following in_valid.
module tb_input_binarizer;
  import dtnn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [7:0] TH [5] = '{8'd51, 8'd102, 8'd128, 8'd153, 8'd204};

  logic             rst_n, in_valid, out_valid;
  logic [7:0]       pix [N_PIX];
  logic [N_PIX-1:0] bits [N_ENS];

  input_binarizer dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix),
                       .out_valid(out_valid), .bits(bits));

  logic [N_PIX-1:0] exp_bits [N_ENS];
  logic             exp_valid;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0;
    for (int p = 0; p < N_PIX; p++) pix[p] = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0) failures++;
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      for (int p = 0; p < N_PIX; p++) begin
        case ($urandom_range(3))
          0: pix[p] = TH[$urandom_range(4)];
          1: pix[p] = TH[$urandom_range(4)] + 8'd1;
          default: pix[p] = 8'($urandom);
        endcase
      end
      for (int t = 0; t < 5; t++)
        for (int p = 0; p < N_PIX; p++)
          exp_bits[t][p] = (int'(pix[p]) > int'(TH[t]));
      exp_valid = in_valid;
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== exp_valid) begin
        failures++;
        $display("ERR valid got %0b exp %0b", out_valid, exp_valid);
      end
      if (exp_valid) begin
        for (int t = 0; t < 5; t++) begin
          checks++;
          if (bits[t] !== exp_bits[t]) begin
            failures++;
            if (failures < 10) $display("ERR threshold %0d mismatch", t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
