// circular_line_buffer: the hidden-state line buffer of the DSC module.
//
// Each word is one pixel's whole M-channel hidden state (M*16 = 256 bits, the
// width of the paper's hidden-state AXI port).  Shifting such words through
// the line buffers like the intra-slice window would cost a long update, so,
// as in the paper, K+1 line buffers of length K+W-1 are used in rotation:
// the buffer that holds the oldest row is the one being (re)written by the
// incoming stream, while the other K, all complete rows, are read to form the
// K x K x M sliding cube.  No row ever moves; only the write pointer turns.
//
// Input is the zero-padded hidden-state stream (padding_load with PAD =
// (K-1)/2 and TAIL_ROWS = 1).  While padded row r is written, column c of
// rows r-K .. r-1 is read and shifted into the right of the cube, so the
// cube lags the input by one row: after padded word (r, c) with r >= K and
// c >= K-1 (padded coordinates, P = (K-1)/2), the cube holds the window
// centred on padded position (r-1-P, c-P), i.e. image pixel (r-1-2P, c-2P).
// The single tail row of the padded stream flushes the last window row.
// cube[0][0] is the top-left word.
//
// Interface: valid/ready in, valid/ready out (cube plus out_last on the last
// window of a slice).  Timing: one word per cycle, cube valid one cycle after
// the word that completes it.
module circular_line_buffer #(
  parameter int unsigned DATA_W = 256,
  parameter int unsigned K      = 5,
  parameter int unsigned MAX_W  = 768,
  parameter int unsigned MAX_H  = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [15:0]       cfg_w,
  input  logic [15:0]       cfg_h,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] cube [K][K],
  output logic              out_last
);

  localparam int unsigned NB = K + 1;                  // number of line buffers
  localparam int unsigned WP = MAX_W + K - 1;          // line buffer length
  localparam int unsigned CW = $clog2(WP + 1);
  localparam int unsigned RW = $clog2(MAX_H + K + 1);
  localparam int unsigned BW = $clog2(NB);

  logic [DATA_W-1:0] lb [NB][WP];
  logic [BW-1:0] wbuf;                                 // buffer being written
  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic [CW-1:0] pw;
  logic [RW-1:0] ph;
  logic          take, cube_done, last_pos;
  logic [DATA_W-1:0] column [K];

  // Buffer holding row r-K+k while row r is written into wbuf.
  function automatic logic [BW-1:0] rd_buf(input logic [BW-1:0] w, input int k);
    int b;
    b = int'(w) + 1 + k;
    if (b >= int'(NB)) b -= int'(NB);
    return BW'(b);
  endfunction

  always_comb begin
    pw        = CW'(cfg_w) + CW'(K - 1);
    ph        = RW'(cfg_h) + RW'(K);                   // K-1 border rows + 1 tail row
    take      = in_valid && in_ready;
    cube_done = (row >= RW'(K)) && (col >= CW'(K - 1));
    last_pos  = (row == ph - 1'b1) && (col == pw - 1'b1);
    for (int k = 0; k < K; k++) column[k] = lb[rd_buf(wbuf, k)][col];
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (take) begin
      lb[wbuf][col] <= in_data;
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) cube[r][c] <= cube[r][c+1];
        cube[r][K-1] <= column[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf      <= '0;
      col       <= '0;
      row       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      if (in_ready) out_valid <= take && cube_done;
      if (take) begin
        out_last <= last_pos;
        if (col == pw - 1'b1) begin
          col  <= '0;
          row  <= last_pos ? '0 : row + 1'b1;
          wbuf <= last_pos ? '0 : rd_buf(wbuf, 0);
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
