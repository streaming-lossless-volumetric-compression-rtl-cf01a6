// tb_srlvc_full: the accelerator at its default parameters on full-size
// slices.  First two 256x256 12-bit slices (L = 8), the image size for which
// the per-module latencies of the FPGA implementation are reported, the
// second using the hidden states produced by the first; then one 768x768
// 8-bit slice (L = 1), the largest slice the line buffers hold.  Every
// (mu, s) pair and every updated hidden state is compared with the reference
// model in srlvc_tb_env.  With outputs always ready, the cycles per slice are
// checked against 9 cycles per pixel plus fill, and reported beside the
// 1.83 M cycles the slowest reported module (7.83 ms at 237 MHz) would take.
module tb_srlvc_full;
  srlvc_tb_env env ();

  initial begin
    #1000000000;
    env.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end

  initial begin
    int cycles;
    env.stall_pct = 0;
    env.gap_pct = 0;
    env.reset_dut();
    env.load_weights();
    env.run_volume(256, 256, 2, 12, 3, cycles);
    $display("256x256 slice: %0d cycles (%0.2f per pixel)", cycles, real'(cycles) / 65536.0);
    env.checks++;
    if (cycles > 65536 * 9 + (3 * 262 + 3) + 256 * 6 + 40 || cycles > 1855710) begin
      env.failures++;
      $display("slice too slow");
    end
    env.checks++;
    if (env.n_recurrent == 0) env.failures++;
    env.run_volume(768, 768, 1, 8, 0, cycles);
    $display("768x768 slice: %0d cycles (%0.2f per pixel)", cycles, real'(cycles) / 589824.0);
    env.checks++;
    if (cycles > 589824 * 9 + (3 * 774 + 3) + 768 * 6 + 40) begin
      env.failures++;
      $display("slice too slow");
    end
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end
endmodule
