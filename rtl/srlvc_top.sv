// srlvc_top: streaming SR-LVC probability-estimation accelerator.
//
// For every pixel x(i,j) of slice t it produces the logistic parameters
// (mu, s) with which a host-side arithmetic coder codes the pixel, and the
// pixel's updated M-channel hidden state h_t(i,j) that the host stores and
// streams back in for slice t+1.  Two independent input streams feed it in
// raster order: the raw pixels of slice t and the hidden states h_{t-1}
// (all zeros for the first slice).
//
//   pixels -> pixel_normalize -> padding_load -> sliding_window (7x7) --+--> masked_cnn ---> fusion_gate A -> prob_estimator -> (mu, s)
//                                                                       +--> standard_cnn -> fusion_gate B -----------------> h_t
//   h_{t-1} -> padding_load -> circular_line_buffer (5x5xM) -> dsc_module --(Rst_h, Upd_h, Cand_h, h_{t-1}(i,j))--> both gates
//
// This is the paper's structure: one sliding window shared by the masked
// and the standard convolution, one DSC path on the hidden state whose
// features go to both fusion gates, a compression gate feeding the
// probability estimator and an update gate producing the new hidden state.
// The two forks are lockstep (a word leaves only when both consumers take
// it); each fusion gate joins one word of each path, and since both paths
// are raster-ordered over the same slice they pair up pixel by pixel.  Every
// stage has valid/ready flow control, so either output may stall the
// pipeline.  The pixel path delivers its window for (i,j) after the input
// reaches (i+3, j+3); the hidden path after h reaches (i+3, j+2); the
// faster path simply waits at the gate.
//
// DRAM, the AXI engines and the arithmetic coder are outside this module;
// their streams are its ports.  Weights (4866 16-bit words, address map in
// srlvc_pkg) are written over the wt_* bus before a volume is processed.
// Slice width/height, bit depth D and log2 L are run-time inputs, to be
// held stable during a slice; MAX_W (768, the paper's largest
// configuration) sizes the line buffers.
//
// Throughput: the convolution engines need 9 cycles per pixel and set the
// pace (about 0.59 M cycles for a 256 x 256 slice).
//
// The padders' slice-end flags (px_last, ph_last) are left unused on
// purpose: the line buffers count rows themselves and generate their own
// end-of-slice flag for the windows, which is what travels downstream.
module srlvc_top
  import srlvc_pkg::*;
#(
  parameter int unsigned MAX_W = 768,
  parameter int unsigned MAX_H = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [15:0]       cfg_w,
  input  logic [15:0]       cfg_h,
  input  logic [4:0]        cfg_depth,
  input  logic [3:0]        cfg_log2_l,
  // weight load
  input  logic              wt_we,
  input  logic [WA_W-1:0]   wt_addr,
  input  word_t             wt_data,
  // raw pixels of slice t
  input  logic              pix_valid,
  output logic              pix_ready,
  input  logic [15:0]       pix_data,
  // hidden states of slice t-1 (channel m in bits [16m+15:16m])
  input  logic              hin_valid,
  output logic              hin_ready,
  input  logic [M*DW-1:0]   hin_data,
  // probability parameters for the arithmetic coder
  output logic              prob_valid,
  input  logic              prob_ready,
  output word_t             prob_mu,
  output word_t             prob_s,
  output logic              prob_last,
  // updated hidden states of slice t
  output logic              hout_valid,
  input  logic              hout_ready,
  output logic [M*DW-1:0]   hout_data,
  output logic              hout_last
);

  localparam int unsigned PX = (KX - 1) / 2;
  localparam int unsigned PH = (KH - 1) / 2;

  // ---------------- pixel path ----------------
  logic  nx_valid, nx_ready;
  word_t nx_data;
  logic  px_valid, px_ready, px_last;
  logic [DW-1:0] px_data;
  logic  sw_valid, sw_ready, sw_last;
  logic [DW-1:0] sw_win [KX][KX];
  word_t win [KX][KX];

  pixel_normalize u_norm (
    .clk, .rst_n, .cfg_log2_l, .cfg_depth,
    .in_valid(pix_valid), .in_ready(pix_ready), .in_pix(pix_data),
    .out_valid(nx_valid), .out_ready(nx_ready), .out_x(nx_data)
  );

  padding_load #(.DATA_W(DW), .PAD(PX), .TAIL_ROWS(0), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_pad_x (
    .clk, .rst_n, .cfg_w, .cfg_h,
    .in_valid(nx_valid), .in_ready(nx_ready), .in_data(nx_data),
    .out_valid(px_valid), .out_ready(px_ready), .out_data(px_data), .out_last(px_last)
  );

  sliding_window #(.DATA_W(DW), .K(KX), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_win (
    .clk, .rst_n, .cfg_w, .cfg_h,
    .in_valid(px_valid), .in_ready(px_ready), .in_data(px_data),
    .out_valid(sw_valid), .out_ready(sw_ready), .win(sw_win), .out_last(sw_last)
  );

  always_comb
    for (int r = 0; r < KX; r++)
      for (int c = 0; c < KX; c++) win[r][c] = word_t'(sw_win[r][c]);

  // lockstep fork to the two intra-slice convolutions
  logic  mc_in_ready, sc_in_ready;
  logic  mc_valid, mc_ready, mc_last, sc_valid, sc_ready, sc_last;
  word_t mc_feat [NFEAT];
  word_t sc_feat [NFEAT];

  assign sw_ready = mc_in_ready && sc_in_ready;

  masked_cnn u_mcnn (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .in_valid(sw_valid && sc_in_ready), .in_ready(mc_in_ready), .win(win), .in_last(sw_last),
    .out_valid(mc_valid), .out_ready(mc_ready), .feat(mc_feat), .out_last(mc_last)
  );

  standard_cnn u_scnn (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .in_valid(sw_valid && mc_in_ready), .in_ready(sc_in_ready), .win(win), .in_last(sw_last),
    .out_valid(sc_valid), .out_ready(sc_ready), .feat(sc_feat), .out_last(sc_last)
  );

  // ---------------- hidden-state path ----------------
  logic  ph_valid, ph_ready, ph_last;
  logic [M*DW-1:0] ph_data;
  logic  cb_valid, cb_ready, cb_last;
  logic [M*DW-1:0] cube [KH][KH];
  logic  ds_valid, ds_ready, ds_last;
  word_t ds_feat [NFEAT];
  word_t ds_hprev [M];

  padding_load #(.DATA_W(M*DW), .PAD(PH), .TAIL_ROWS(1), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_pad_h (
    .clk, .rst_n, .cfg_w, .cfg_h,
    .in_valid(hin_valid), .in_ready(hin_ready), .in_data(hin_data),
    .out_valid(ph_valid), .out_ready(ph_ready), .out_data(ph_data), .out_last(ph_last)
  );

  circular_line_buffer #(.DATA_W(M*DW), .K(KH), .MAX_W(MAX_W), .MAX_H(MAX_H)) u_clb (
    .clk, .rst_n, .cfg_w, .cfg_h,
    .in_valid(ph_valid), .in_ready(ph_ready), .in_data(ph_data),
    .out_valid(cb_valid), .out_ready(cb_ready), .cube(cube), .out_last(cb_last)
  );

  dsc_module u_dsc (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .in_valid(cb_valid), .in_ready(cb_ready), .cube(cube), .in_last(cb_last),
    .out_valid(ds_valid), .out_ready(ds_ready), .feat(ds_feat), .h_prev(ds_hprev),
    .out_last(ds_last)
  );

  // ---------------- fusion gates ----------------
  logic  ga_h_ready, gb_h_ready;
  logic  ga_valid, ga_ready, ga_last, gb_valid, gb_last;
  word_t ga_state [M];
  word_t gb_state [M];

  assign ds_ready = ga_h_ready && gb_h_ready;

  // A: compression gate (masked CNN features) -> probability estimator
  fusion_gate u_gate_a (
    .clk, .rst_n,
    .x_valid(mc_valid), .x_ready(mc_ready), .x_feat(mc_feat), .x_last(mc_last),
    .h_valid(ds_valid && gb_h_ready), .h_ready(ga_h_ready), .h_feat(ds_feat),
    .h_prev(ds_hprev), .h_last(ds_last),
    .out_valid(ga_valid), .out_ready(ga_ready), .h_new(ga_state), .out_last(ga_last)
  );

  // B: update gate (standard CNN features) -> new hidden state
  fusion_gate u_gate_b (
    .clk, .rst_n,
    .x_valid(sc_valid), .x_ready(sc_ready), .x_feat(sc_feat), .x_last(sc_last),
    .h_valid(ds_valid && ga_h_ready), .h_ready(gb_h_ready), .h_feat(ds_feat),
    .h_prev(ds_hprev), .h_last(ds_last),
    .out_valid(gb_valid), .out_ready(hout_ready), .h_new(gb_state), .out_last(gb_last)
  );

  prob_estimator u_prob (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .in_valid(ga_valid), .in_ready(ga_ready), .h(ga_state), .in_last(ga_last),
    .out_valid(prob_valid), .out_ready(prob_ready), .mu(prob_mu), .s(prob_s),
    .out_last(prob_last)
  );

  assign hout_valid = gb_valid;
  assign hout_last  = gb_last;
  always_comb
    for (int m = 0; m < M; m++) hout_data[m*DW +: DW] = gb_state[m];

endmodule
