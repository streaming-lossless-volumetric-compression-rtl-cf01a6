// srlvc_pkg: constants, types and arithmetic helpers shared by the SR-LVC
// streaming accelerator.
//
// Network shape (follows the paper): feature dimension M = 16, intra-slice
// kernels 7x7 (masked and standard), hidden-state depth-wise kernel 5x5,
// 3*M = 48 gate features (Reset, Update, Candidate) per convolution path,
// a 16 -> 2 linear probability estimator, biases everywhere.  With these
// numbers the weight count is 1200 + 2400 + 416 + 816 + 34 = 4866, the total
// the paper quotes, which is how the masked kernel (24 causal taps) and the
// estimator's bias were pinned down.
//
// Number format (this design's choice): the paper deploys the weights as
// 16-bit half-precision floats.  Here every weight and activation is a
// 16-bit two's-complement fixed-point number with FRAC = 10 fraction bits
// (range about +-32).  Products are 32 bits, sums are kept in ACC_W = 40 bits
// and brought back to 16 bits by an arithmetic shift right of FRAC
// (truncation toward -inf) followed by saturation.
//
// Feature channel order inside a 3*M vector: [0, M) Reset, [M, 2M) Update,
// [2M, 3M) Candidate (this design's choice).
//
// Weight address map of the shared weight-write bus (this design's choice):
// each block owns a contiguous range, kernel-major, weights before biases.
package srlvc_pkg;

  localparam int unsigned DW     = 16;       // data word
  localparam int unsigned FRAC   = 10;       // fraction bits
  localparam int unsigned ACC_W  = 40;       // accumulator width
  localparam int unsigned M      = 16;       // feature dimension (Table 2)
  localparam int unsigned NFEAT  = 3 * M;    // Rst/Upd/Cand channels
  localparam int unsigned KX     = 7;        // intra-slice kernel (Table 2)
  localparam int unsigned KH     = 5;        // DSC depth-wise kernel (Table 2 note)
  localparam int unsigned MASK_TAPS = (KX * KX - 1) / 2;   // 24 causal taps
  localparam int unsigned WA_W   = 13;       // weight address width

  typedef logic signed [DW-1:0]    word_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam word_t ONE      = word_t'(1 << FRAC);
  localparam word_t HALF     = word_t'(1 << (FRAC - 1));
  localparam word_t THREE    = word_t'(3 << FRAC);
  localparam word_t SIXTH    = word_t'(((1 << FRAC) + 3) / 6);   // round(2^F/6)

  // Weight address map
  localparam int unsigned MC_NW   = NFEAT * MASK_TAPS + NFEAT;   // 1200
  localparam int unsigned SC_NW   = NFEAT * KX * KX + NFEAT;     // 2400
  localparam int unsigned DW_NW   = M * KH * KH + M;             // 416
  localparam int unsigned PW_NW   = NFEAT * M + NFEAT;           // 816
  localparam int unsigned PE_NW   = 2 * M + 2;                   // 34
  localparam int unsigned MC_BASE = 0;
  localparam int unsigned SC_BASE = MC_BASE + MC_NW;             // 1200
  localparam int unsigned DW_BASE = SC_BASE + SC_NW;             // 3600
  localparam int unsigned PW_BASE = DW_BASE + DW_NW;             // 4016
  localparam int unsigned PE_BASE = PW_BASE + PW_NW;             // 4832
  localparam int unsigned N_WEIGHTS = PE_BASE + PE_NW;           // 4866

  // Accumulator -> 16-bit word: shift out FRAC bits, saturate.
  function automatic word_t acc_to_word(input acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return word_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return word_t'(16'sh8000);
    else                         return word_t'(s[DW-1:0]);
  endfunction

  // Saturate a wide signed value (already in word scale) to 16 bits.
  function automatic word_t sat_word(input acc_t s);
    if (s > acc_t'(32767))       return word_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return word_t'(16'sh8000);
    else                         return word_t'(s[DW-1:0]);
  endfunction

  // Fixed-point product a*b scaled back to a word (truncating, saturating).
  function automatic word_t fx_mul(input word_t a, input word_t b);
    return acc_to_word(acc_t'(a) * acc_t'(b));
  endfunction

  // Bias aligned to a product sum (product sums carry 2*FRAC fraction bits).
  function automatic acc_t bias_acc(input word_t b);
    return acc_t'(b) <<< FRAC;
  endfunction

endpackage
