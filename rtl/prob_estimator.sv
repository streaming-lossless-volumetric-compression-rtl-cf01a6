// prob_estimator: linear predictor of the logistic distribution parameters.
//
// From the fused M-channel state h it computes
//   mu = sum_m Wmu[m] * h[m] + bmu,   s = sum_m Ws[m] * h[m] + bs
// with M x 2 multipliers working in parallel and one adder tree per output,
// as the paper describes (16 + 1 weights per output, 34 in all).  The paper
// does not say how s is kept positive or in what domain the arithmetic coder
// reads it; this module returns the raw linear outputs and leaves that to the
// coder (this design's choice), in the 16-bit fixed-point format of
// srlvc_pkg.  Weights: BASE + m for Wmu, BASE + M + m for Ws,
// BASE + 2M for bmu, BASE + 2M + 1 for bs.
//
// Interface: state in, (mu, s) out, both valid/ready.  Timing: one register
// stage, one state per cycle.
module prob_estimator
  import srlvc_pkg::*;
#(
  parameter int unsigned BASE = PE_BASE
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wt_we,
  input  logic [WA_W-1:0] wt_addr,
  input  word_t           wt_data,
  input  logic            in_valid,
  output logic            in_ready,
  input  word_t           h [M],
  input  logic            in_last,
  output logic            out_valid,
  input  logic            out_ready,
  output word_t           mu,
  output word_t           s,
  output logic            out_last
);

  word_t w [2][1][M];
  word_t b [2];
  word_t hrow [1][M];
  word_t y [2];

  always_ff @(posedge clk) begin
    if (wt_we) begin
      automatic int a = int'(wt_addr) - int'(BASE);
      if (a >= 0 && a < int'(2 * M))             w[a / M][0][a % M] <= wt_data;
      else if (a >= int'(2 * M) && a < int'(2 * M + 2)) b[a - int'(2 * M)] <= wt_data;
    end
  end

  assign hrow[0] = h;

  for (genvar o = 0; o < 2; o++) begin : g_tree
    conv_pe #(.ROWS(1), .COLS(M), .LAST_COLS(M)) u_tree (
      .d(hrow), .w(w[o]), .bias(b[o]), .y(y[o])
    );
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      mu        <= '0;
      s         <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        mu       <= y[0];
        s        <= y[1];
        out_last <= in_last;
      end
    end
  end

endmodule
