// fusion_gate: the parameter-free GRU-style gate that merges intra-slice
// features with the previous slice's hidden state.
//
// For every channel m (equations from the paper, hard activations as the
// paper deploys them):
//   R    = hsig(Rst_x + Rst_h)
//   U    = hsig(Upd_x + Upd_h)
//   Cand = htanh(Cand_x + R * Cand_h)
//   h    = U * h_prev + (1 - U) * Cand
// with hsig(v) = 0 for v <= -3, 1 for v >= 3, v/6 + 0.5 otherwise, and
// htanh(v) = v clamped to [-1, 1].  The same module serves both gates of the
// design: fed by the masked CNN it gives the state for the probability
// estimator, fed by the standard CNN it gives the updated hidden state h_t.
//
// Datapath: LANES channels per cycle, each lane using five multipliers
// (v/6 twice, R*Cand_h, U*h_prev, (1-U)*Cand).  LANES = 2 gives the ten
// multipliers the paper reports for its fusion gate; that reading of the
// resource count, the lane split and the 16-bit fixed-point arithmetic
// (srlvc_pkg) are this design's choices.
//
// Interface: two input streams joined here, the intra-slice features (x_*)
// and the hidden-state features with the centre hidden state (h_*); both are
// taken in the same cycle (an assertion checks that their slice-end flags
// agree).  Output: the M-channel state (valid/ready).
// Timing: capture cycle plus M/LANES lane cycles (8 with the defaults); the
// result is valid on the next cycle.
module fusion_gate
  import srlvc_pkg::*;
#(
  parameter int unsigned LANES = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   x_valid,
  output logic   x_ready,
  input  word_t  x_feat [NFEAT],
  input  logic   x_last,
  input  logic   h_valid,
  output logic   h_ready,
  input  word_t  h_feat [NFEAT],
  input  word_t  h_prev [M],
  input  logic   h_last,
  output logic   out_valid,
  input  logic   out_ready,
  output word_t  h_new [M],
  output logic   out_last
);

  localparam int unsigned NSTEP = M / LANES;
  localparam int unsigned SW    = $clog2(NSTEP + 1);

  word_t xf [NFEAT];
  word_t hf [NFEAT];
  word_t hp [M];
  word_t y  [LANES];
  logic  busy, last_q, take, room;
  logic [SW-1:0] step;

  function automatic word_t add_sat(input word_t a, input word_t b);
    return sat_word(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic word_t hsig(input word_t v);
    if (v <= -THREE)     return word_t'(0);
    else if (v >= THREE) return ONE;
    else                 return add_sat(fx_mul(v, SIXTH), HALF);
  endfunction

  function automatic word_t htanh(input word_t v);
    if (v <= -ONE)     return -ONE;
    else if (v >= ONE) return ONE;
    else               return v;
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      automatic int    m = int'(step) * LANES + l;
      automatic word_t r, u, cand;
      r     = hsig(add_sat(xf[m], hf[m]));
      u     = hsig(add_sat(xf[M + m], hf[M + m]));
      cand  = htanh(add_sat(xf[2*M + m], fx_mul(r, hf[2*M + m])));
      y[l]  = add_sat(fx_mul(u, hp[m]), fx_mul(ONE - u, cand));
    end
  end

  // Join: each side's ready depends only on the other side's valid, so a
  // lockstep fork upstream cannot form a combinational loop.
  assign room    = !busy && (!out_valid || out_ready);
  assign take    = x_valid && h_valid && room;
  assign x_ready = h_valid && room;
  assign h_ready = x_valid && room;

  // Both streams are raster-ordered over the same slice: their slice ends
  // must coincide.
  a_last_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (x_last == h_last));

  // data registers (no reset needed: read only after being written)
  always_ff @(posedge clk) begin
    if (take) begin
      xf <= x_feat;
      hf <= h_feat;
      hp <= h_prev;
    end else if (busy) begin
      for (int l = 0; l < LANES; l++) h_new[int'(step) * LANES + l] <= y[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      step      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      last_q    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        last_q <= x_last;
        busy   <= 1'b1;
        step   <= '0;
      end else if (busy) begin
        if (step == SW'(NSTEP - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          out_last  <= last_q;
        end else begin
          step <= step + 1'b1;
        end
      end
    end
  end

endmodule
