// dsc_module: depth-wise separable convolution of the previous slice's hidden
// state, giving the inter-slice gate features Rst_h, Upd_h, Cand_h.
//
// Structure from the paper: a depth-wise KH x KH (5x5) convolution with one
// PE per channel (TO = M = 16), each PE computing its row sums in parallel and
// adding them in an adder tree; ReLU; then a point-wise 1x1 convolution from
// M to 3*M channels, again with TO = M PEs, each a 16-input multiply-add tree.
// 48 outputs over 16 PEs take three passes.  All convolutions have biases.
//
// The input is a sliding cube from circular_line_buffer: KH x KH words, each
// word the packed M-channel hidden state of one pixel (channel j in bits
// [16j+15:16j]).  Besides the features, the module passes on the cube's
// centre word, h_{t-1}(i,j), which the fusion gates need.
//
// Weights (this design's layout): depth-wise BASE_DW + ch*25 + r*5 + c,
// biases BASE_DW + 400 + ch; point-wise BASE_PW + o*16 + i, biases
// BASE_PW + 768 + o.
//
// Timing: capture cycle, one depth-wise cycle, three point-wise cycles; the
// result is valid on the cycle after, so one cube every 5 cycles.
module dsc_module
  import srlvc_pkg::*;
#(
  parameter int unsigned K       = KH,
  parameter int unsigned BASE_DW = DW_BASE,
  parameter int unsigned BASE_PW = PW_BASE
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wt_we,
  input  logic [WA_W-1:0]    wt_addr,
  input  word_t              wt_data,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [M*DW-1:0]    cube [K][K],
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output word_t              feat [NFEAT],
  output word_t              h_prev [M],
  output logic               out_last
);

  localparam int unsigned NDW   = M * K * K;
  localparam int unsigned NPW   = NFEAT * M;
  localparam int unsigned NPASS = NFEAT / M;
  localparam int unsigned C     = (K - 1) / 2;

  typedef enum logic [1:0] {S_IDLE, S_DW, S_PW} state_t;

  word_t  dw_w [M][K][K];
  word_t  dw_b [M];
  word_t  pw_w [NFEAT][1][M];
  word_t  pw_b [NFEAT];
  word_t  cube_q [M][K][K];        // channel-major copy of the cube
  word_t  dw_y [M];
  word_t  dw_q [1][M];             // ReLU output (one row of M inputs)
  word_t  pw_y [M];
  state_t state;
  logic [1:0] pass;
  logic   last_q;

  // Weight load
  always_ff @(posedge clk) begin
    if (wt_we) begin
      automatic int a = int'(wt_addr) - int'(BASE_DW);
      automatic int b = int'(wt_addr) - int'(BASE_PW);
      if (a >= 0 && a < int'(NDW))           dw_w[a / (K*K)][(a % (K*K)) / K][a % K] <= wt_data;
      else if (a >= int'(NDW) && a < int'(NDW + M)) dw_b[a - int'(NDW)] <= wt_data;
      if (b >= 0 && b < int'(NPW))           pw_w[b / M][0][b % M] <= wt_data;
      else if (b >= int'(NPW) && b < int'(NPW + NFEAT)) pw_b[b - int'(NPW)] <= wt_data;
    end
  end

  for (genvar ch = 0; ch < M; ch++) begin : g_dw
    conv_pe #(.ROWS(K), .COLS(K), .LAST_COLS(K)) u_pe (
      .d(cube_q[ch]), .w(dw_w[ch]), .bias(dw_b[ch]), .y(dw_y[ch])
    );
  end

  for (genvar p = 0; p < M; p++) begin : g_pw
    conv_pe #(.ROWS(1), .COLS(M), .LAST_COLS(M)) u_pe (
      .d(dw_q), .w(pw_w[int'(pass) * M + p]), .bias(pw_b[int'(pass) * M + p]), .y(pw_y[p])
    );
  end

  assign in_ready = (state == S_IDLE) && (!out_valid || out_ready);

  // data registers (no reset needed: read only after being written)
  always_ff @(posedge clk) begin
    if (state == S_IDLE && in_valid && in_ready) begin
      for (int ch = 0; ch < M; ch++) begin
        for (int r = 0; r < K; r++)
          for (int c = 0; c < K; c++) cube_q[ch][r][c] <= word_t'(cube[r][c][ch*DW +: DW]);
        h_prev[ch] <= word_t'(cube[C][C][ch*DW +: DW]);
      end
    end
    if (state == S_DW)                                     // ReLU
      for (int ch = 0; ch < M; ch++) dw_q[0][ch] <= dw_y[ch][DW-1] ? word_t'(0) : dw_y[ch];
    if (state == S_PW)
      for (int p = 0; p < M; p++) feat[int'(pass) * M + p] <= pw_y[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pass      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      last_q    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && in_ready) begin
          last_q <= in_last;
          state  <= S_DW;
        end
        S_DW: begin
          pass  <= '0;
          state <= S_PW;
        end
        S_PW: begin
          if (pass == 2'(NPASS - 1)) begin
            state     <= S_IDLE;
            out_valid <= 1'b1;
            out_last  <= last_q;
          end else begin
            pass <= pass + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
