// tb_srlvc_top: end-to-end test of the accelerator at its default
// parameters on small volumes: an 8-bit volume (L = 1) of three 9x7 slices,
// whose hidden states are carried from slice to slice, then, without a
// reset, a 12-bit volume (L = 8) of two 6x5 slices (bit-depth mode switch
// and slice-size change).  Outputs are stalled at random and inputs arrive
// with random gaps.  Every (mu, s) pair and every updated hidden state is
// compared with the bit-accurate reference model in srlvc_tb_env, and each
// mechanism listed there must occur.  A final 8-bit slice without stalls or
// gaps checks the pace: 9 cycles per pixel plus the fill latency.
module tb_srlvc_top;
  srlvc_tb_env env ();

  initial begin
    #2000000;
    env.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end

  initial begin
    int cycles;
    env.reset_dut();
    env.load_weights();
    env.run_volume(9, 7, 3, 8, 0, cycles);
    env.run_volume(6, 5, 2, 12, 3, cycles);
    env.stall_pct = 0;
    env.gap_pct = 0;
    env.run_volume(12, 8, 1, 8, 0, cycles);
    env.checks++;
    // 96 pixels at 9 cycles each, plus the 7x7 window fill (three rows and
    // three words of the padded 18-wide slice), six padding words between
    // rows that carry no window, and pipeline stages
    if (cycles > 96 * 9 + (3 * 18 + 3) + 8 * 6 + 40) begin
      env.failures++;
      $display("slice took %0d cycles", cycles);
    end
    $display("12x8 slice without stalls: %0d cycles", cycles);
    env.report_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end
endmodule
