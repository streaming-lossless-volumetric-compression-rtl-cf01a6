// tb_fusion_gate: drives the intra-slice and the hidden-state streams
// independently (different random gaps) with random output stalls and
// checks each output state against the gate equations evaluated here in
// real arithmetic:
//   R = hsig(Rx+Rh), U = hsig(Ux+Uh), C = htanh(Cx + R*Ch), h = U*hp + (1-U)*C
// allowing 12 LSB for the fixed-point truncations (an error of 1-2 LSB in R
// is multiplied by Cand_h, which reaches 4.0 here).  Counts how often the hard
// sigmoid and hard tanh saturate and how often they are in their linear
// range; each must happen.  Also checks the join pairs words in order and
// that with free-running inputs and output one pixel takes M/LANES+1 = 9
// cycles.
module tb_fusion_gate;
  import srlvc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  x_valid = 0, x_ready, x_last = 0, h_valid = 0, h_ready, h_last = 0;
  logic  out_valid, out_ready = 0, out_last;
  word_t x_feat [NFEAT];
  word_t h_feat [NFEAT];
  word_t h_prev [M];
  word_t h_new [M];
  int checks = 0, failures = 0;
  int sig_sat = 0, sig_lin = 0, tanh_sat = 0, tanh_lin = 0;
  bit stall_en = 1;

  fusion_gate dut (.*);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real LSB = 1.0 / 1024.0;

  function automatic real hsig(real v);
    if (v <= -3.0) return 0.0;
    if (v >= 3.0) return 1.0;
    return v / 6.0 + 0.5;
  endfunction
  function automatic real htanh(real v);
    if (v <= -1.0) return -1.0;
    if (v >= 1.0) return 1.0;
    return v;
  endfunction
  function automatic real rv(word_t w);
    return real'(w) * LSB;
  endfunction

  // The two input streams are queued separately; the expected result is
  // formed when both words of a pair have been handed over.
  word_t xq [$];
  word_t hq [$];
  real   exp_q [$];

  int x_hs = 0, h_hs = 0;     // handshake counters seen at the clock edge
  always @(posedge clk) begin
    if (rst_n && x_valid && x_ready) x_hs++;
    if (rst_n && h_valid && h_ready) h_hs++;
    if (rst_n && x_valid && x_ready) for (int k = 0; k < NFEAT; k++) xq.push_back(x_feat[k]);
    if (rst_n && h_valid && h_ready) begin
      for (int k = 0; k < NFEAT; k++) hq.push_back(h_feat[k]);
      for (int k = 0; k < M; k++) hq.push_back(h_prev[k]);
    end
  end

  always @(posedge clk) begin
    while (xq.size() >= NFEAT && hq.size() >= NFEAT + M) begin
      word_t xf [NFEAT];
      word_t hf [NFEAT + M];
      for (int k = 0; k < NFEAT; k++) xf[k] = xq.pop_front();
      for (int k = 0; k < NFEAT + M; k++) hf[k] = hq.pop_front();
      for (int m = 0; m < M; m++) begin
        automatic real vr = rv(xf[m]) + rv(hf[m]);
        automatic real vu = rv(xf[M+m]) + rv(hf[M+m]);
        automatic real r = hsig(vr), u = hsig(vu);
        automatic real vc = rv(xf[2*M+m]) + r * rv(hf[2*M+m]);
        automatic real c = htanh(vc);
        if (vu <= -3.0 || vu >= 3.0) sig_sat++; else sig_lin++;
        if (vc <= -1.0 || vc >= 1.0) tanh_sat++; else tanh_lin++;
        exp_q.push_back(u * rv(hf[NFEAT + m]) + (1.0 - u) * c);
      end
    end
  end

  always @(posedge clk) begin
    out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (rst_n && out_valid && out_ready) begin
      automatic int bad = 0;
      checks++;
      for (int m = 0; m < M; m++) begin
        automatic real e = (exp_q.size() != 0) ? exp_q.pop_front() : 99.0;
        automatic real d = rv(h_new[m]) - e;
        if (d > 12.0 * LSB || d < -12.0 * LSB) begin
          bad++;
          if (bad == 1) $display("ch %0d: got %f expected %f", m, rv(h_new[m]), e);
        end
      end
      if (bad != 0) failures++;
    end
  end

  int acc_cycles [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!stall_en && x_valid && x_ready) acc_cycles.push_back(cyc);
  end

  int n_pix;
  task automatic x_driver(int n, bit gaps);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      x_valid = 1; x_last = (i == n - 1);
      for (int k = 0; k < NFEAT; k++) x_feat[k] = word_t'($urandom_range(0, 8191) - 4096);
      begin
        automatic int n0 = x_hs;
        do @(negedge clk); while (x_hs == n0);
      end
      if (gaps && $urandom_range(0, 1) == 0) begin x_valid = 0; repeat ($urandom_range(0, 6)) @(negedge clk); end
    end
    x_valid = 0;
  endtask
  task automatic h_driver(int n, bit gaps);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      h_valid = 1; h_last = (i == n - 1);
      for (int k = 0; k < NFEAT; k++) h_feat[k] = word_t'($urandom_range(0, 8191) - 4096);
      for (int k = 0; k < M; k++) h_prev[k] = word_t'($urandom_range(0, 2048) - 1024);
      begin
        automatic int n0 = h_hs;
        do @(negedge clk); while (h_hs == n0);
      end
      if (gaps && $urandom_range(0, 2) == 0) begin h_valid = 0; repeat ($urandom_range(0, 9)) @(negedge clk); end
    end
    h_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      x_driver(80, 1);
      h_driver(80, 1);
    join
    repeat (40) @(posedge clk);
    stall_en = 0;
    repeat (3) @(posedge clk);
    fork
      x_driver(10, 0);
      h_driver(10, 0);
    join
    repeat (40) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || xq.size() != 0 || hq.size() != 0) begin failures++; $display("outputs missing"); end
    checks++;
    if (sig_sat == 0 || sig_lin == 0 || tanh_sat == 0 || tanh_lin == 0) begin
      failures++;
      $display("activation ranges not all exercised: %0d %0d %0d %0d", sig_sat, sig_lin, tanh_sat, tanh_lin);
    end
    for (int i = 1; i < acc_cycles.size(); i++) begin
      checks++;
      if (acc_cycles[i] - acc_cycles[i-1] != M / 2 + 1) begin
        failures++;
        $display("pixel interval %0d cycles, expected %0d", acc_cycles[i] - acc_cycles[i-1], M / 2 + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
