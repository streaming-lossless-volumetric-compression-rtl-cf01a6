// tb_standard_cnn: loads random weights over the weight bus (with writes to
// neighbouring addresses that must be ignored), sends random 7x7 windows with
// random output stalls and checks all 48 features of each window against a
// direct 64-bit convolution computed here.  Also checks the pass schedule:
// with a free-running output one window is accepted every NPASS+1 = 9 cycles.
module tb_standard_cnn;
  import srlvc_pkg::*;
  localparam int K = 7, NT = 49, BASE = SC_BASE, NW = SC_NW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            wt_we = 0;
  logic [WA_W-1:0] wt_addr = 0;
  word_t           wt_data = 0;
  logic  in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  word_t win [K][K];
  word_t feat [NFEAT];
  int checks = 0, failures = 0;
  bit stall_en = 1;

  standard_cnn dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t wref [NFEAT][NT];
  word_t bref [NFEAT];
  int    exp_q [$];                  // 48 expected features per window
  bit    last_q [$];

  function automatic int conv_ref(word_t w_in [K][K], int k);
    longint s = longint'(bref[k]) <<< FRAC;
    longint v;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) s += longint'(w_in[r][c]) * longint'(wref[k][r*K + c]);
    v = s >>> FRAC;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  // input monitor: expected results
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      for (int k = 0; k < NFEAT; k++) exp_q.push_back(conv_ref(win, k));
      last_q.push_back(in_last);
    end
  end

  // output checker
  always @(posedge clk) begin
    out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic int e [NFEAT];
        automatic bit el = last_q.pop_front();
        automatic int bad = 0;
        for (int k = 0; k < NFEAT; k++) e[k] = exp_q.pop_front();
        for (int k = 0; k < NFEAT; k++) if (int'(feat[k]) != e[k]) bad++;
        if (bad != 0 || out_last !== el) begin
          failures++;
          $display("%0d wrong features (feat0 got %0d exp %0d; f1 %0d %0d; f47 %0d %0d)", bad, feat[0], e[0], feat[1], e[1], feat[47], e[47]);
        end
      end
    end
  end

  task automatic wr(int a, word_t v);
    @(negedge clk);
    wt_we = 1; wt_addr = WA_W'(a); wt_data = v;
    @(negedge clk);
    wt_we = 0;
  endtask

  int acc_cycles [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!stall_en && in_valid && in_ready) acc_cycles.push_back(cyc);
  end

  task automatic send(bit gaps, bit lst);
    @(negedge clk);
    in_valid = 1; in_last = lst;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) win[r][c] = word_t'($urandom_range(0, 8191) - 4096);
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    if (gaps && $urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      automatic word_t v = word_t'($urandom_range(0, 1023) - 512);
      if (a < NFEAT * NT) wref[a / NT][a % NT] = v; else bref[a - NFEAT * NT] = v;
      wr(BASE + a, v);
    end
    if (BASE > 0) wr(BASE - 1, 16'sh7fff);
    wr(BASE + NW, 16'sh7fff);
    for (int i = 0; i < 60; i++) send(1, (i % 20) == 19);
    @(negedge clk); in_valid = 0;
    repeat (40) @(posedge clk);
    stall_en = 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 10; i++) send(0, 0);
    @(negedge clk); in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size() / NFEAT); end
    for (int i = 1; i < acc_cycles.size(); i++) begin
      checks++;
      if (acc_cycles[i] - acc_cycles[i-1] != 9) begin
        failures++;
        $display("window interval %0d cycles, expected 9", acc_cycles[i] - acc_cycles[i-1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
