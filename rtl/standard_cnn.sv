// standard_cnn: full 7x7 convolution of the current slice that produces the
// 3*M = 48 gate features (Reset, Update, Candidate) for the hidden-state
// update path.
//
// As in the paper, TO = 6 processing elements (conv_pe) evaluate six kernels
// at once on a captured K x K window, so the 48 kernels take NFEAT/TO = 8
// passes of one cycle each.  Each PE unrolls all K*K multiply-adds.  Weights
// and biases live in registers loaded over the shared weight-write bus at
// addresses BASE + k*K*K + r*K + c (kernel k, row r, column c) and
// BASE + NFEAT*K*K + k (bias k); that layout is this design's choice.
//
// Interface: window in (valid/ready), feature vector out (valid/ready),
// out_last forwarded from the window.  Timing: a window is captured in one
// cycle, then 8 pass cycles; the result is valid on the cycle after the last
// pass, so a new window can be taken every NPASS+1 = 9 cycles.
module standard_cnn
  import srlvc_pkg::*;
#(
  parameter int unsigned K    = KX,
  parameter int unsigned TO   = 6,
  parameter int unsigned BASE = SC_BASE
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wt_we,
  input  logic [WA_W-1:0]  wt_addr,
  input  word_t            wt_data,
  input  logic             in_valid,
  output logic             in_ready,
  input  word_t            win [K][K],
  input  logic             in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            feat [NFEAT],
  output logic             out_last
);

  localparam int unsigned NPASS = NFEAT / TO;
  localparam int unsigned NTAP  = K * K;
  localparam int unsigned PW    = $clog2(NPASS + 1);

  word_t wt   [NFEAT][K][K];
  word_t bias [NFEAT];
  word_t win_q [K][K];
  word_t y [TO];
  logic  busy, last_q;
  logic [PW-1:0] pass;

  // Weight load
  always_ff @(posedge clk) begin
    if (wt_we) begin
      automatic int a = int'(wt_addr) - int'(BASE);
      if (a >= 0 && a < int'(NFEAT * NTAP)) wt[a / NTAP][(a % NTAP) / K][a % K] <= wt_data;
      else if (a >= int'(NFEAT * NTAP) && a < int'(NFEAT * NTAP + NFEAT))
        bias[a - int'(NFEAT * NTAP)] <= wt_data;
    end
  end

  for (genvar p = 0; p < TO; p++) begin : g_pe
    conv_pe #(.ROWS(K), .COLS(K), .LAST_COLS(K)) u_pe (
      .d(win_q), .w(wt[int'(pass) * TO + p]), .bias(bias[int'(pass) * TO + p]), .y(y[p])
    );
  end

  assign in_ready = !busy && (!out_valid || out_ready);

  // data registers (no reset needed: read only after being written)
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      win_q  <= win;
    end else if (busy) begin
      for (int p = 0; p < TO; p++) feat[int'(pass) * TO + p] <= y[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      pass      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      last_q    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        last_q <= in_last;
        busy   <= 1'b1;
        pass   <= '0;
      end else if (busy) begin
        if (pass == PW'(NPASS - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          out_last  <= last_q;
        end else begin
          pass <= pass + 1'b1;
        end
      end
    end
  end

endmodule
