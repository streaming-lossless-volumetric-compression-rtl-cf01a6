// sliding_window: line buffers and K x K register window of the intra-slice
// convolutions (shared by the masked and the standard CNN).
//
// Input is the zero-padded raster stream of a slice, (H+K-1) x (W+K-1) words
// (see padding_load).  Each accepted word at padded column c moves the window
// as in the paper's four steps: (1) every window register shifts one column
// left, dropping the leftmost column; (2) the column c of the line buffers is
// loaded into the rightmost window column; (3) that line-buffer column shifts
// up by one, dropping its topmost ("dirty") word; (4) the new word enters at
// the bottom of the column.  Steps 2-4 are one read-modify-write of column c.
// The paper counts K line buffers of length K+W-1; the K-th one only ever
// holds the dirty word that step 3 drops, so it is not stored and K-1 row
// memories remain (a storage saving of this design, no change in behaviour).
//
// A window is emitted once K rows and K columns have been seen in the padded
// slice, i.e. one window per image pixel, in raster order; the window
// emitted after padded word (r, c) is centred on image pixel (r-P, c-P),
// P = (K-1)/2.  win[0][0] is the top-left word.
//
// Interface: valid/ready in, valid/ready out (window plus out_last on the last
// window of a slice).  Timing: one word per cycle; a window leaves one cycle
// after the word that completes it.  H and W are run-time inputs.
module sliding_window #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned K      = 7,
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
  output logic [DATA_W-1:0] win [K][K],
  output logic              out_last
);

  localparam int unsigned WP = MAX_W + K - 1;          // line buffer length
  localparam int unsigned CW = $clog2(WP + 1);
  localparam int unsigned RW = $clog2(MAX_H + K);

  logic [DATA_W-1:0] lb [K-1][WP];                     // line buffers
  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic [CW-1:0] pw;
  logic [RW-1:0] ph;
  logic          take, win_done, last_pos;
  logic [DATA_W-1:0] column [K];

  always_comb begin
    pw       = CW'(cfg_w) + CW'(K - 1);
    ph       = RW'(cfg_h) + RW'(K - 1);
    take     = in_valid && in_ready;
    win_done = (row >= RW'(K - 1)) && (col >= CW'(K - 1));
    last_pos = (row == ph - 1'b1) && (col == pw - 1'b1);
    for (int k = 0; k < K - 1; k++) column[k] = lb[k][col];
    column[K-1] = in_data;
  end

  assign in_ready = !out_valid || out_ready;

  // Line-buffer column update (steps 3 and 4)
  always_ff @(posedge clk) begin
    if (take) begin
      for (int k = 0; k < K - 1; k++) lb[k][col] <= column[k+1];
    end
  end

  // Window shift (steps 1 and 2)
  always_ff @(posedge clk) begin
    if (take) begin
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= column[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      if (in_ready) out_valid <= take && win_done;
      if (take) begin
        out_last <= last_pos;
        if (col == pw - 1'b1) begin
          col <= '0;
          row <= last_pos ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
