// tb_dsc_module: loads random depth-wise and point-wise weights over the
// weight bus, sends random 5x5x16 hidden-state cubes with random output
// stalls and checks all 48 features (depth-wise 5x5 per channel, ReLU,
// point-wise 16 -> 48, each with bias, computed here in 64-bit integers with
// the same shift-and-saturate rule) and the passed-on centre hidden state.
// Also checks that with a free-running output a cube is taken every 5 cycles
// and that ReLU actually clipped some depth-wise outputs.
module tb_dsc_module;
  import srlvc_pkg::*;
  localparam int K = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            wt_we = 0;
  logic [WA_W-1:0] wt_addr = 0;
  word_t           wt_data = 0;
  logic  in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  logic [M*DW-1:0] cube [K][K];
  word_t feat [NFEAT];
  word_t h_prev [M];
  int checks = 0, failures = 0, relu_clips = 0;
  bit stall_en = 1;

  dsc_module dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t dww [M][K*K];
  word_t dwb [M];
  word_t pww [NFEAT][M];
  word_t pwb [NFEAT];
  int    exp_q [$];           // 48 features then 16 centre words per cube
  bit    last_q [$];

  function automatic longint shs(longint s);
    longint v = s >>> FRAC;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      automatic longint d [M];
      for (int ch = 0; ch < M; ch++) begin
        automatic longint s = longint'(dwb[ch]) <<< FRAC;
        for (int r = 0; r < K; r++)
          for (int c = 0; c < K; c++)
            s += longint'($signed(cube[r][c][ch*16 +: 16])) * longint'(dww[ch][r*K + c]);
        d[ch] = shs(s);
        if (d[ch] < 0) begin d[ch] = 0; relu_clips++; end
      end
      for (int o = 0; o < NFEAT; o++) begin
        automatic longint s = longint'(pwb[o]) <<< FRAC;
        for (int i = 0; i < M; i++) s += d[i] * longint'(pww[o][i]);
        exp_q.push_back(int'(shs(s)));
      end
      for (int ch = 0; ch < M; ch++) exp_q.push_back(int'($signed(cube[2][2][ch*16 +: 16])));
      last_q.push_back(in_last);
    end
  end

  always @(posedge clk) begin
    out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      automatic int bad = 0;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        for (int k = 0; k < NFEAT; k++) if (int'(feat[k]) != exp_q.pop_front()) bad++;
        for (int k = 0; k < M; k++) if (int'(h_prev[k]) != exp_q.pop_front()) bad++;
        if (bad != 0 || out_last !== last_q.pop_front()) begin
          failures++;
          $display("%0d wrong words", bad);
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
      for (int c = 0; c < K; c++)
        for (int ch = 0; ch < M; ch++) cube[r][c][ch*16 +: 16] = 16'($urandom_range(0, 2047) - 1024);
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    if (gaps && $urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DW_NW; a++) begin
      automatic word_t v = word_t'($urandom_range(0, 1023) - 512);
      if (a < M * K * K) dww[a / (K*K)][a % (K*K)] = v; else dwb[a - M*K*K] = v;
      wr(DW_BASE + a, v);
    end
    for (int a = 0; a < PW_NW; a++) begin
      automatic word_t v = word_t'($urandom_range(0, 1023) - 512);
      if (a < NFEAT * M) pww[a / M][a % M] = v; else pwb[a - NFEAT*M] = v;
      wr(PW_BASE + a, v);
    end
    wr(PW_BASE + PW_NW, 16'sh7fff);
    for (int i = 0; i < 60; i++) send(1, (i % 20) == 19);
    @(negedge clk); in_valid = 0;
    repeat (30) @(posedge clk);
    stall_en = 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 10; i++) send(0, 0);
    @(negedge clk); in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    checks++;
    if (relu_clips == 0) begin failures++; $display("ReLU never clipped"); end
    for (int i = 1; i < acc_cycles.size(); i++) begin
      checks++;
      if (acc_cycles[i] - acc_cycles[i-1] != 5) begin
        failures++;
        $display("cube interval %0d cycles, expected 5", acc_cycles[i] - acc_cycles[i-1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
