// pixel_normalize: scales raw pixels into the network's number format.
//
// The paper normalises a pixel x of bit depth D with a scaling factor L as
// x_n = (x / 2^D) * L, with L = 1 for 8-bit and L = 8 for 12-bit data.  Here
// L is restricted to a power of two, so the product is a shift:
// x_n = (x << (FRAC + log2 L)) >> D, giving a 16-bit fixed-point word with
// FRAC fraction bits (saturated; 12-bit data with L = 8 peaks just under 8.0).
// Bit depth and log2 L are run-time inputs and must be held stable within a
// slice; that and the power-of-two restriction are this design's choices.
//
// Interface: one valid/ready stream in (raw pixel), one out (normalised word).
// Timing: one register stage; a pixel per cycle when the output is not
// stalled.
module pixel_normalize
  import srlvc_pkg::*;
#(
  parameter int unsigned PIX_W = 16          // raw pixel container width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [3:0]       cfg_log2_l,       // log2 of scaling factor L
  input  logic [4:0]       cfg_depth,        // bit depth D
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PIX_W-1:0] in_pix,
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            out_x
);

  acc_t scaled;
  always_comb scaled = (acc_t'(in_pix) <<< (FRAC + 32'(cfg_log2_l))) >>> cfg_depth;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_x <= sat_word(scaled);
    end
  end

endmodule
