// masked_cnn: masked 7x7 convolution of the current slice that produces the
// intra-slice gate features Rst_x, Upd_x, Cand_x (3*M = 48 channels) used to
// predict the current pixel.
//
// The mask keeps only the pixels already coded before x(i,j) in raster
// order: the P = 3 full rows above the centre and the P pixels left of it,
// MASK_TAPS = 24 taps per kernel (the centre pixel is excluded).  As the
// paper says, the masked kernel has about half the weights of the standard
// one and its PEs are cut down accordingly: each conv_pe here has 3 rows of
// 7 taps and a last row of 3.  It reads the same K x K window as the
// standard CNN and uses its top P+1 rows.  Like the standard CNN it has
// TO = 6 PEs and needs 8 passes for the 48 kernels.
//
// Weights: BASE + k*24 + t for kernel k and causal tap t (t in raster order,
// row t/7, column t%7 of the window), biases at BASE + 48*24 + k.
//
// Interface and timing: identical to standard_cnn (capture cycle, 8 pass
// cycles, result on the following cycle).
module masked_cnn
  import srlvc_pkg::*;
#(
  parameter int unsigned K    = KX,
  parameter int unsigned TO   = 6,
  parameter int unsigned BASE = MC_BASE
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

  localparam int unsigned P     = (K - 1) / 2;
  localparam int unsigned MR    = P + 1;              // window rows used
  localparam int unsigned NTAP  = (K * K - 1) / 2;    // causal taps
  localparam int unsigned NPASS = NFEAT / TO;
  localparam int unsigned PW    = $clog2(NPASS + 1);

  word_t wt   [NFEAT][MR][K];
  word_t bias [NFEAT];
  word_t win_q [MR][K];
  word_t y [TO];
  logic  busy, last_q;
  logic [PW-1:0] pass;

  always_ff @(posedge clk) begin
    if (wt_we) begin
      automatic int a = int'(wt_addr) - int'(BASE);
      if (a >= 0 && a < int'(NFEAT * NTAP)) wt[a / NTAP][(a % NTAP) / K][(a % NTAP) % K] <= wt_data;
      else if (a >= int'(NFEAT * NTAP) && a < int'(NFEAT * NTAP + NFEAT))
        bias[a - int'(NFEAT * NTAP)] <= wt_data;
    end
  end

  for (genvar p = 0; p < TO; p++) begin : g_pe
    conv_pe #(.ROWS(MR), .COLS(K), .LAST_COLS(P)) u_pe (
      .d(win_q), .w(wt[int'(pass) * TO + p]), .bias(bias[int'(pass) * TO + p]), .y(y[p])
    );
  end

  assign in_ready = !busy && (!out_valid || out_ready);

  // data registers (no reset needed: read only after being written)
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int r = 0; r < MR; r++) win_q[r] <= win[r];
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
