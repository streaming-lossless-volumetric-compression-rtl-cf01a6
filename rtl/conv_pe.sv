// conv_pe: one convolution processing element, fully unrolled.
//
// Follows the paper's PE structure: each kernel row has its own multiply-add
// tree producing row_sum[r]; a second adder tree adds the ROWS row sums and
// the bias.  For the 7x7 standard kernel that is seven 7-input trees and an
// 8-input tree (seven row sums plus bias).  The masked kernel uses the same
// PE with ROWS = 4 and only LAST_COLS = 3 taps in its last row (the 24 causal
// taps above and left of the centre).
//
// Arithmetic: 16 x 16 -> 32-bit products summed in ACC_W bits; the bias is
// aligned to the product scale; the result is shifted back by FRAC and
// saturated to 16 bits (see srlvc_pkg).  The paper uses half-precision floats
// instead; the fixed-point format is this design's choice.
//
// Interface and timing: purely combinational; the caller registers the
// result.  w[r][c] multiplies d[r][c]; entries beyond LAST_COLS in the last
// row are ignored.
module conv_pe
  import srlvc_pkg::*;
#(
  parameter int unsigned ROWS      = 7,
  parameter int unsigned COLS      = 7,
  parameter int unsigned LAST_COLS = 7
) (
  input  word_t d [ROWS][COLS],
  input  word_t w [ROWS][COLS],
  input  word_t bias,
  output word_t y
);

  acc_t row_sum [ROWS];
  acc_t total;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      row_sum[r] = '0;
      for (int c = 0; c < COLS; c++) begin
        if (r + 1 < ROWS || c < LAST_COLS)
          row_sum[r] += acc_t'(d[r][c]) * acc_t'(w[r][c]);
      end
    end
    total = bias_acc(bias);
    for (int r = 0; r < ROWS; r++) total += row_sum[r];
    y = acc_to_word(total);
  end

endmodule
