// tb_sliding_window: feeds zero-padded slices (two sizes, random input gaps
// and output stalls) into the 7x7 line-buffer window and compares every
// emitted window with the 7x7 neighbourhood of the corresponding image pixel
// taken straight from the image (zeros outside).  Also checks that exactly
// one window per pixel is emitted, out_last, and the rate: with no stalls a
// 12-wide slice delivers its pixels' windows at one per cycle.
module tb_sliding_window;
  localparam int K = 7, P = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] cfg_w, cfg_h;
  logic        in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [15:0] in_data = 0;
  logic [15:0] win [K][K];
  int checks = 0, failures = 0;
  bit stall_en = 1;

  sliding_window #(.DATA_W(16), .K(K), .MAX_W(16), .MAX_H(16)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ow, oh, oi, oj, cur, nwin;
  function automatic logic [15:0] pix(int r, int c, int s);
    if (r < 0 || r >= oh || c < 0 || c >= ow) return 16'h0;
    return 16'(1000 * s + 37 * r + c + 1);
  endfunction

  always @(posedge clk) begin
    out_ready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      automatic int bad = 0;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          if (win[r][c] !== pix(oi - P + r, oj - P + c, cur)) bad++;
      checks++;
      if (bad != 0 || out_last !== (oi == oh - 1 && oj == ow - 1)) begin
        failures++;
        $display("slice %0d window (%0d,%0d): %0d wrong words, last=%0b", cur, oi, oj, bad, out_last);
      end
      nwin++;
      if (oj == ow - 1) begin
        oj = 0;
        if (oi == oh - 1) begin oi = 0; cur++; end else oi++;
      end else oj++;
    end
  end

  task automatic run_slice(int w, int h, int s, bit gaps);
    int t0, t1;
    cfg_w = 16'(w); cfg_h = 16'(h); ow = w; oh = h; nwin = 0;
    for (int r = -P; r < h + P; r++)
      for (int c = -P; c < w + P; c++) begin
        @(negedge clk);
        in_valid = 1; in_data = pix(r, c, s);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        if (gaps && $urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
      end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nwin != w * h || cur != s + 1) begin
      failures++;
      $display("slice %0d: %0d windows, expected %0d", s, nwin, w * h);
    end
  endtask

  int cyc = 0, first_cyc = -1, last_cyc = -1;
  always @(posedge clk) begin
    cyc++;
    if (!stall_en && out_valid && out_ready && cur == 2) begin
      if (first_cyc < 0 && oi == 0 && oj == 0) first_cyc = cyc;
      if (last_cyc < 0 && oi == 0 && oj == ow - 1) last_cyc = cyc;
    end
  end

  initial begin
    oi = 0; oj = 0; cur = 0;
    cfg_w = 5; cfg_h = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_slice(5, 4, 0, 1);
    run_slice(12, 6, 1, 1);
    // rate check: no gaps, no stalls; each row of 12 windows in 12 cycles
    stall_en = 0;
    repeat (3) @(posedge clk);
    run_slice(12, 2, 2, 0);
    checks++;
    if (first_cyc < 0 || last_cyc - first_cyc != 11) begin
      failures++;
      $display("rate: first row took %0d cycles for 12 windows", last_cyc - first_cyc + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
