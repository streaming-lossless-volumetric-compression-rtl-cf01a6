// srlvc_tb_env: end-to-end test environment for srlvc_top.
//
// Holds the accelerator (at its default parameters), a bit-accurate
// reference model of the whole network written directly from the equations
// (normalisation, 24-tap masked and 49-tap standard 7x7 convolutions, 5x5
// depth-wise convolution + ReLU + 16->48 point-wise convolution, the two
// hard-activation fusion gates and the 16->2 linear estimator, all in the
// 16-bit fixed-point format with truncating shifts and saturation), stream
// drivers for pixels and hidden states, and checkers for the (mu, s) and
// updated-hidden-state outputs.  The test programs (tb_srlvc_top,
// tb_srlvc_full) call load_weights() and run_volume().
//
// The hidden state fed to slice t+1 is the reference model's h_t, so a
// wrong value is reported once and does not cascade.  Mechanism counters
// record back-pressure on each output, input starvation, border pixels
// (windows reaching into the zero padding), recurrent slices (t > 0), the
// 8-bit/L=1 and 12-bit/L=8 modes and slice-end flags.
module srlvc_tb_env;
  import srlvc_pkg::*;

  localparam int MAXD = 768;          // largest slice the reference holds

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0]     cfg_w = 0, cfg_h = 0;
  logic [4:0]      cfg_depth = 8;
  logic [3:0]      cfg_log2_l = 0;
  logic            wt_we = 0;
  logic [WA_W-1:0] wt_addr = 0;
  word_t           wt_data = 0;
  logic            pix_valid = 0, pix_ready;
  logic [15:0]     pix_data = 0;
  logic            hin_valid = 0, hin_ready;
  logic [M*DW-1:0] hin_data = 0;
  logic            prob_valid, prob_ready = 0, prob_last;
  word_t           prob_mu, prob_s;
  logic            hout_valid, hout_ready = 0, hout_last;
  logic [M*DW-1:0] hout_data;

  srlvc_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_prob_stall = 0, n_hout_stall = 0, n_pix_starve = 0, n_border = 0;
  int n_recurrent = 0, n_mode8 = 0, n_mode12 = 0, n_last = 0;

  // ---------------- weights ----------------
  int wmc [NFEAT][MASK_TAPS];  int bmc [NFEAT];
  int wsc [NFEAT][KX*KX];      int bsc [NFEAT];
  int wdw [M][KH*KH];          int bdw [M];
  int wpw [NFEAT][M];          int bpw [NFEAT];
  int wpe [2][M];              int bpe [2];

  function automatic int rnd(int mag);
    return int'($urandom_range(0, 2 * mag)) - mag;
  endfunction

  task automatic wr(int a, int v);
    @(negedge clk);
    wt_we = 1; wt_addr = WA_W'(a); wt_data = word_t'(v);
    @(negedge clk);
    wt_we = 0;
  endtask

  task automatic load_weights();
    int a = 0;
    for (int k = 0; k < NFEAT; k++) for (int t = 0; t < MASK_TAPS; t++) begin wmc[k][t] = rnd(48); wr(a++, wmc[k][t]); end
    for (int k = 0; k < NFEAT; k++) begin bmc[k] = rnd(512); wr(a++, bmc[k]); end
    for (int k = 0; k < NFEAT; k++) for (int t = 0; t < KX*KX; t++) begin wsc[k][t] = rnd(40); wr(a++, wsc[k][t]); end
    for (int k = 0; k < NFEAT; k++) begin bsc[k] = rnd(512); wr(a++, bsc[k]); end
    for (int m = 0; m < M; m++) for (int t = 0; t < KH*KH; t++) begin wdw[m][t] = rnd(160); wr(a++, wdw[m][t]); end
    for (int m = 0; m < M; m++) begin bdw[m] = rnd(256); wr(a++, bdw[m]); end
    for (int k = 0; k < NFEAT; k++) for (int i = 0; i < M; i++) begin wpw[k][i] = rnd(400); wr(a++, wpw[k][i]); end
    for (int k = 0; k < NFEAT; k++) begin bpw[k] = rnd(256); wr(a++, bpw[k]); end
    for (int o = 0; o < 2; o++) for (int m = 0; m < M; m++) begin wpe[o][m] = rnd(2048); wr(a++, wpe[o][m]); end
    for (int o = 0; o < 2; o++) begin bpe[o] = rnd(1024); wr(a++, bpe[o]); end
    checks++;
    if (a != int'(N_WEIGHTS)) begin failures++; $display("weight count %0d", a); end
  endtask

  // ---------------- reference model ----------------
  int W, H;
  int raw  [MAXD][MAXD];
  int xn   [MAXD][MAXD];
  int hp   [MAXD][MAXD][M];      // h_{t-1}
  int hn   [MAXD][MAXD][M];      // h_t expected
  int emu  [MAXD][MAXD];
  int es   [MAXD][MAXD];

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int shr(longint v);
    return sat(v >>> FRAC);
  endfunction
  function automatic int xat(int i, int j);
    return (i < 0 || j < 0 || i >= H || j >= W) ? 0 : xn[i][j];
  endfunction
  function automatic int hat(int i, int j, int m);
    return (i < 0 || j < 0 || i >= H || j >= W) ? 0 : hp[i][j][m];
  endfunction
  function automatic int hsig(int v);
    if (v <= -3072) return 0;
    if (v >= 3072) return 1024;
    return sat(longint'(shr(longint'(v) * 171)) + 512);
  endfunction
  function automatic int htanh(int v);
    return (v < -1024) ? -1024 : (v > 1024) ? 1024 : v;
  endfunction
  function automatic void gate(int xf [NFEAT], int hf [NFEAT], int i, int j, output int y [M]);
    for (int m = 0; m < M; m++) begin
      int r, u, c;
      r = hsig(sat(longint'(xf[m]) + hf[m]));
      u = hsig(sat(longint'(xf[M+m]) + hf[M+m]));
      c = htanh(sat(longint'(xf[2*M+m]) + shr(longint'(r) * hf[2*M+m])));
      y[m] = sat(longint'(shr(longint'(u) * hp[i][j][m])) + shr(longint'(1024 - u) * c));
    end
  endfunction

  task automatic reference(int depth, int l2);
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++)
        xn[i][j] = sat((longint'(raw[i][j]) <<< (FRAC + l2)) >>> depth);
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++) begin
        int fm [NFEAT], fs [NFEAT], fh [NFEAT], d [M], ya [M], yb [M];
        for (int k = 0; k < NFEAT; k++) begin
          longint sm = longint'(bmc[k]) <<< FRAC;
          longint ss = longint'(bsc[k]) <<< FRAC;
          for (int t = 0; t < MASK_TAPS; t++) sm += longint'(wmc[k][t]) * xat(i - 3 + t / 7, j - 3 + t % 7);
          for (int t = 0; t < 49; t++)        ss += longint'(wsc[k][t]) * xat(i - 3 + t / 7, j - 3 + t % 7);
          fm[k] = shr(sm); fs[k] = shr(ss);
        end
        for (int m = 0; m < M; m++) begin
          longint s = longint'(bdw[m]) <<< FRAC;
          for (int t = 0; t < 25; t++) s += longint'(wdw[m][t]) * hat(i - 2 + t / 5, j - 2 + t % 5, m);
          d[m] = shr(s);
          if (d[m] < 0) d[m] = 0;
        end
        for (int k = 0; k < NFEAT; k++) begin
          longint s = longint'(bpw[k]) <<< FRAC;
          for (int m = 0; m < M; m++) s += longint'(wpw[k][m]) * d[m];
          fh[k] = shr(s);
        end
        gate(fm, fh, i, j, ya);
        gate(fs, fh, i, j, yb);
        for (int m = 0; m < M; m++) hn[i][j][m] = yb[m];
        for (int o = 0; o < 2; o++) begin
          longint s = longint'(bpe[o]) <<< FRAC;
          for (int m = 0; m < M; m++) s += longint'(wpe[o][m]) * ya[m];
          if (o == 0) emu[i][j] = shr(s); else es[i][j] = shr(s);
        end
      end
  endtask

  // ---------------- drivers ----------------
  int pix_hs = 0, hin_hs = 0;
  int stall_pct = 30, gap_pct = 20;
  always @(posedge clk) begin
    if (pix_valid && pix_ready) pix_hs++;
    if (hin_valid && hin_ready) hin_hs++;
    if (rst_n && pix_ready && !pix_valid && cfg_w != 0) n_pix_starve++;
    if (prob_valid && !prob_ready) n_prob_stall++;
    if (hout_valid && !hout_ready) n_hout_stall++;
    prob_ready <= ($urandom_range(0, 99) >= stall_pct);
    hout_ready <= ($urandom_range(0, 99) >= stall_pct);
  end

  task automatic drive_pixels();
    @(negedge clk);
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++) begin
        automatic int n0 = pix_hs;
        pix_valid = 1; pix_data = 16'(raw[i][j]);
        do @(negedge clk); while (pix_hs == n0);
        if ($urandom_range(0, 99) < gap_pct) begin pix_valid = 0; repeat ($urandom_range(1, 12)) @(negedge clk); end
      end
    pix_valid = 0;
  endtask

  task automatic drive_hidden();
    @(negedge clk);
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++) begin
        automatic int n0 = hin_hs;
        hin_valid = 1;
        for (int m = 0; m < M; m++) hin_data[m*DW +: DW] = DW'(hp[i][j][m]);
        do @(negedge clk); while (hin_hs == n0);
        if ($urandom_range(0, 99) < gap_pct) begin hin_valid = 0; repeat ($urandom_range(1, 12)) @(negedge clk); end
      end
    hin_valid = 0;
  endtask

  // ---------------- checkers ----------------
  int pi, pj, hi, hj, p_done, h_done, n_bad_p, n_bad_h;
  always @(posedge clk) begin
    if (rst_n && prob_valid && prob_ready) begin
      checks++;
      if (int'(prob_mu) != emu[pi][pj] || int'(prob_s) != es[pi][pj] ||
          prob_last !== (pi == H - 1 && pj == W - 1)) begin
        failures++;
        if (n_bad_p++ < 5) $display("(mu,s) at (%0d,%0d): got %0d %0d expected %0d %0d",
                                    pi, pj, prob_mu, prob_s, emu[pi][pj], es[pi][pj]);
      end
      if (pi < 3 || pj < 3 || pi >= H - 3 || pj >= W - 3) n_border++;
      if (prob_last) n_last++;
      if (pj == W - 1) begin pj = 0; pi++; end else pj++;
      if (pi == H) p_done = 1;
    end
    if (rst_n && hout_valid && hout_ready) begin
      automatic int bad = 0;
      checks++;
      for (int m = 0; m < M; m++) if (int'($signed(hout_data[m*DW +: DW])) != hn[hi][hj][m]) bad++;
      if (bad != 0 || hout_last !== (hi == H - 1 && hj == W - 1)) begin
        failures++;
        if (n_bad_h++ < 5) $display("h_t at (%0d,%0d): %0d channels wrong (ch0 got %0d expected %0d)",
                                    hi, hj, bad, $signed(hout_data[DW-1:0]), hn[hi][hj][0]);
      end
      if (hj == W - 1) begin hj = 0; hi++; end else hj++;
      if (hi == H) h_done = 1;
    end
  end

  task automatic reset_dut();
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
  endtask

  // Runs one volume of n slices of w x h pixels with bit depth depth and
  // scaling log2 l2.  Pixels are random with a smooth component so the
  // slices resemble each other.  Returns the cycles of the last slice.
  task automatic run_volume(int w, int h, int n, int depth, int l2, output int last_cycles);
    W = w; H = h;
    cfg_w = 16'(w); cfg_h = 16'(h); cfg_depth = 5'(depth); cfg_log2_l = 4'(l2);
    for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) for (int m = 0; m < M; m++) hp[i][j][m] = 0;
    for (int t = 0; t < n; t++) begin
      int c0;
      for (int i = 0; i < H; i++)
        for (int j = 0; j < W; j++) begin
          int base = ((i * 7 + j * 5 + t * 3) % 64) << (depth - 6);
          raw[i][j] = (base + int'($urandom_range(0, (1 << (depth - 3)) - 1))) & ((1 << depth) - 1);
        end
      reference(depth, l2);
      pi = 0; pj = 0; hi = 0; hj = 0; p_done = 0; h_done = 0; n_bad_p = 0; n_bad_h = 0;
      c0 = cyc;
      fork
        drive_pixels();
        drive_hidden();
      join
      while (!(p_done && h_done)) @(posedge clk);
      last_cycles = cyc - c0;
      if (t > 0) n_recurrent++;
      if (depth == 8) n_mode8++; else n_mode12++;
      for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) for (int m = 0; m < M; m++) hp[i][j][m] = hn[i][j][m];
    end
  endtask

  function automatic void require(int count, string what);
    checks++;
    if (count == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("  %-28s %0d", what, count);
  endfunction

  function automatic void report_mechanisms();
    require(n_prob_stall, "prob output back-pressure");
    require(n_hout_stall, "h_t output back-pressure");
    require(n_pix_starve, "pixel input starvation");
    require(n_border,     "border (zero-padded) pixels");
    require(n_recurrent,  "recurrent slices");
    require(n_mode8,      "8-bit slices (L=1)");
    require(n_mode12,     "12-bit slices (L=8)");
    require(n_last,       "slice-end flags");
  endfunction

endmodule
