// tb_ensemble_combiner: checks the per-class reduction of five votes. Each
// class gets a different function: class c's table is loaded with a
// "at least k of 5 votes" threshold function (k = c mod 6) or, for some
// classes, a random table; the expected bit is computed from the vote count
// or the table directly. Votes stream one set per cycle with idle gaps;
// latency must be 1 cycle.
module tb_ensemble_combiner;
  import dtnn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, iv, ov, we;
  logic [N_CLASS-1:0] votes [N_ENS];
  logic [N_CLASS-1:0] y;
  logic [7:0] neu, lut;
  logic [63:0] dat;

  ensemble_combiner dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .votes(votes),
    .out_valid(ov), .y(y), .cfg_we(we), .cfg_neuron(neu), .cfg_lut(lut), .cfg_data(dat));

  logic [63:0] tbl [N_CLASS];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; iv = 0; we = 0; neu = 0; lut = 0; dat = 0;
    for (int m = 0; m < N_ENS; m++) votes[m] = '0;
    for (int c = 0; c < N_CLASS; c++) begin
      if (c < 6) begin
        // at-least-c-of-5: entry i is 1 when popcount(i[4:0]) >= c
        for (int i = 0; i < 64; i++) tbl[c][i] = ($countones(i[4:0]) >= c);
      end else begin
        tbl[c] = {$urandom, $urandom};
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CLASS; c++) begin
      @(negedge clk); we = 1; neu = 8'(c); lut = 0; dat = tbl[c];
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 500; it++) begin
      logic [N_CLASS-1:0] e;
      logic ev;
      @(negedge clk);
      iv = ($urandom_range(4) != 0);
      for (int m = 0; m < N_ENS; m++) votes[m] = N_CLASS'($urandom);
      for (int c = 0; c < N_CLASS; c++) begin
        int unsigned idx, cnt;
        idx = 0; cnt = 0;
        for (int m = 0; m < N_ENS; m++) begin
          idx |= int'(votes[m][c]) << m;
          cnt += int'(votes[m][c]);
        end
        e[c] = (c < 6) ? (cnt >= c) : tbl[c][idx];
      end
      ev = iv;
      @(posedge clk); #1;
      checks++;
      if (ov !== ev) begin failures++; $display("ERR valid"); end
      if (ev) begin
        checks++;
        if (y !== e) begin failures++; if (failures < 10) $display("ERR y %h exp %h", y, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
