// input_binarizer: turns each pixel of an image into N_THR binary inputs.
//
// The classifier feeds binary activations straight into lookup tables, so the
// image is binarised with no arithmetic beyond a comparison: bit t of pixel p
// is 1 when pixel p is strictly greater than threshold t, else 0. Each
// ensemble member receives the whole image binarised at its own threshold,
// which recovers some of the grey-level information that a single threshold
// would lose.
//
// Interface: pix[p] is pixel p (PIX_W-bit unsigned code of the 0..1 range);
// bits[t][p] is the result for threshold THRESH[t]. One image per clock:
// in_valid/pix are registered into out_valid/bits, latency 1 cycle.
//
// Following the paper: the rule y = 1 if x > threshold, one threshold per
// ensemble member, and the threshold values 0.2/0.4/0.5/0.6/0.8. The paper
// also calls the thresholds "five evenly spaced threshold values", which the
// listed values are not; the listed values are used. Own choice: 8-bit pixel
// codes, thresholds rounded to round(t*255), the output register.
module input_binarizer
  import dtnn_pkg::*;
#(
  parameter int unsigned N_PIX_P = N_PIX,
  parameter int unsigned N_THR   = N_ENS,
  parameter int unsigned PIX_W_P = PIX_W,
  parameter logic [PIX_W_P-1:0] THRESH [N_THR] = THRESH_DEFAULT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [PIX_W_P-1:0] pix  [N_PIX_P],
  output logic               out_valid,
  output logic [N_PIX_P-1:0] bits [N_THR]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int t = 0; t < N_THR; t++) bits[t] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int t = 0; t < N_THR; t++)
          for (int p = 0; p < N_PIX_P; p++)
            bits[t][p] <= (pix[p] > THRESH[t]);
      end
    end
  end

endmodule
