// padding_load: inserts the zero border a "same" convolution needs.
//
// Both convolution paths of the accelerator start with a Padding Load stage
// between the DRAM stream and the line buffers.  The paper only names the
// block; this is the simplest thing that does the job.  It takes the raster
// stream of an H x W slice (H and W are run-time inputs, W <= MAX_W) and
// produces the raster stream of the (H + 2*PAD + TAIL_ROWS) x (W + 2*PAD)
// padded slice: zeros outside the image, input words inside.  TAIL_ROWS
// extra zero rows are appended after the bottom border; the hidden-state
// path uses one to push its last window row out of the circular line buffer
// (whose output trails its input by one row).
//
// Interface: valid/ready stream in, valid/ready stream out with out_last on
// the final word of a padded slice.  Timing: one register stage, one word per
// cycle.  A slice begins when its first input word is offered (the block
// idles at the top-left corner until then, so cfg_w/cfg_h may change between
// slices); after that, border words are produced without waiting for input.
module padding_load #(
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned PAD       = 3,
  parameter int unsigned TAIL_ROWS = 0,
  parameter int unsigned MAX_W     = 768,
  parameter int unsigned MAX_H     = 1024
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
  output logic [DATA_W-1:0] out_data,
  output logic              out_last
);

  localparam int unsigned CW = $clog2(MAX_W + 2 * PAD + 1);
  localparam int unsigned RW = $clog2(MAX_H + 2 * PAD + TAIL_ROWS + 1);

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic [CW-1:0] pw;        // padded width
  logic [RW-1:0] ph;        // padded height incl. tail rows
  logic          in_img, slot_free, emit, last_pos;

  always_comb begin
    pw       = CW'(cfg_w) + CW'(2 * PAD);
    ph       = RW'(cfg_h) + RW'(2 * PAD + TAIL_ROWS);
    in_img   = (row >= RW'(PAD)) && (row < RW'(cfg_h) + RW'(PAD)) &&
               (col >= CW'(PAD)) && (col < CW'(cfg_w) + CW'(PAD));
    slot_free = !out_valid || out_ready;
    // a padded slice starts only once its first input word is offered, so
    // that the configuration can be set while the block is idle
    emit     = slot_free && ((!in_img && !(row == '0 && col == '0)) || in_valid);
    last_pos = (col == pw - 1'b1) && (row == ph - 1'b1);
  end

  assign in_ready = slot_free && in_img;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (slot_free) out_valid <= emit;
      if (emit) begin
        out_data <= in_img ? in_data : '0;
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
