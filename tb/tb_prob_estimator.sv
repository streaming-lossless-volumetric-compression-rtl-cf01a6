// tb_prob_estimator: loads random estimator weights, streams random states
// with random output stalls and checks mu and s against the two dot
// products plus bias computed here in 64-bit integers (shift right by FRAC,
// saturate), and that a state per cycle is accepted when nothing stalls.
module tb_prob_estimator;
  import srlvc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            wt_we = 0;
  logic [WA_W-1:0] wt_addr = 0;
  word_t           wt_data = 0;
  logic  in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  word_t h [M];
  word_t mu, s;
  int checks = 0, failures = 0;
  bit stall_en = 1;

  prob_estimator dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t wm [M], ws [M], bm, bs;
  int exp_q [$];
  int hs = 0, hs_free = 0;

  function automatic int dot(word_t w [M], word_t b, word_t x [M]);
    longint acc = longint'(b) <<< FRAC;
    longint v;
    for (int m = 0; m < M; m++) acc += longint'(w[m]) * longint'(x[m]);
    v = acc >>> FRAC;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      hs++;
      if (!stall_en) hs_free++;
      exp_q.push_back(dot(wm, bm, h));
      exp_q.push_back(dot(ws, bs, h));
      exp_q.push_back(int'(in_last));
    end
  end

  always @(posedge clk) begin
    out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      automatic int em = exp_q.pop_front();
      automatic int es = exp_q.pop_front();
      automatic int el = exp_q.pop_front();
      checks++;
      if (int'(mu) != em || int'(s) != es || int'(out_last) != el) begin
        failures++;
        $display("got mu=%0d s=%0d expected %0d %0d", mu, s, em, es);
      end
    end
  end

  task automatic wr(int a, word_t v);
    @(negedge clk);
    wt_we = 1; wt_addr = WA_W'(a); wt_data = v;
    @(negedge clk);
    wt_we = 0;
  endtask

  task automatic run(int n, bit gaps);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      automatic int n0 = hs;
      in_valid = 1; in_last = (i == n - 1);
      for (int m = 0; m < M; m++) h[m] = word_t'($urandom_range(0, 2048) - 1024);
      do @(negedge clk); while (hs == n0);
      if (gaps && $urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < PE_NW; a++) begin
      automatic word_t v = word_t'($urandom_range(0, 4095) - 2048);
      if (a < M) wm[a] = v; else if (a < 2 * M) ws[a - M] = v;
      else if (a == 2 * M) bm = v; else bs = v;
      wr(PE_BASE + a, v);
    end
    wr(PE_BASE - 1, 16'sh7fff);
    wr(PE_BASE + PE_NW, 16'sh7fff);
    run(200, 1);
    repeat (10) @(posedge clk);
    stall_en = 0;
    begin
      automatic int c0;
      @(negedge clk);
      c0 = hs_free;
      run(50, 0);
      repeat (10) @(posedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    checks++;
    if (hs_free != 50) begin failures++; $display("throughput: %0d accepted", hs_free); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
