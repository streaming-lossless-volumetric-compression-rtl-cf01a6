// tb_pixel_normalize: checks x_n = x * L / 2^D for the two configurations
// the design targets (8-bit with L = 1, 12-bit with L = 8) and a saturating
// corner, with random input gaps and output stalls.  Expected values are
// computed with real arithmetic (floor of x * L * 2^FRAC / 2^D).
module tb_pixel_normalize;
  import srlvc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]  cfg_log2_l;
  logic [4:0]  cfg_depth;
  logic        in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_pix = 0;
  word_t       out_x;
  int checks = 0, failures = 0;
  int exp_q[$];
  int sent = 0;

  pixel_normalize dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    checks++;
    if (sent != 605) begin failures++; $display("sent %0d", sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && in_valid && in_ready)
      exp_q.push_back(ref_norm(int'(in_pix), int'(cfg_depth), int'(cfg_log2_l)));
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic int e = exp_q.pop_front();
        if (int'(out_x) != e) begin
          failures++;
          $display("mismatch: got %0d expected %0d", out_x, e);
        end
      end
    end
  end

  function automatic int ref_norm(int x, int d, int l2);
    real v;
    v = $floor(real'(x) * (2.0 ** (FRAC + l2)) / (2.0 ** d));
    if (v > 32767.0) v = 32767.0;
    return int'(v);
  endfunction

  task automatic send(int x);
    // inputs change on the falling edge; the handshake is the next rising
    // edge at which in_ready is high
    @(negedge clk);
    in_valid = 1; in_pix = 16'(x);
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    sent++;
    if ($urandom_range(0, 2) == 0) begin
      @(negedge clk); in_valid = 0;
    end
  endtask

  task automatic drain();
    @(negedge clk); in_valid = 0;
    repeat (2) @(posedge clk);
    while (exp_q.size() != 0) @(posedge clk);
  endtask

  initial begin
    cfg_depth = 8; cfg_log2_l = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) send($urandom_range(0, 255));
    send(255); send(0);
    drain();
    cfg_depth = 12; cfg_log2_l = 3;
    for (int i = 0; i < 300; i++) send($urandom_range(0, 4095));
    send(4095); send(1);
    drain();
    // saturation: 16-bit value read as 8-bit data
    cfg_depth = 8; cfg_log2_l = 3;
    send(16'hffff);
    drain();
    repeat (5) @(posedge clk);
    checks++;
    if (sent != 605) begin failures++; $display("sent %0d", sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
