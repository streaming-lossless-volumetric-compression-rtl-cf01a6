// tb_srlvc_workloads: the accelerator at its default parameters on one short
// volume shaped like each class of data it is meant for, at the real slice
// size and bit depth:
//   knee MRI       256 x 256,  8 bit, L = 1, three slices
//   abdominal CT   512 x 512, 12 bit, L = 8, two slices (also the largest
//                  abdominal MRI slice)
//   abdominal MRI  400 x 400, 12 bit, L = 8, one slice
//   chest CT       768 x 768, 12 bit, L = 8, one slice
// Only the first few slices of each volume are run; a longer volume repeats
// the same recurrence.  Pixel values are synthetic (a smooth ramp plus noise,
// see srlvc_tb_env).  Every (mu, s) pair and every updated hidden state is
// compared with the bit-exact reference model, and with both outputs always
// ready each slice must finish within 9 cycles per pixel plus the fill of
// three padded rows and the six padding words of every row.
module tb_srlvc_workloads;
  srlvc_tb_env env ();

  initial begin
    #2000000000;
    env.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end

  task automatic run(string name, int w, int h, int n, int depth, int l2);
    int cycles;
    int bound;
    env.run_volume(w, h, n, depth, l2, cycles);
    bound = w * h * 9 + (3 * (w + 6) + 3) + h * 6 + 40;
    $display("%-14s %0d x %0d x %0d, %0d bit: last slice %0d cycles (%0.2f per pixel)",
             name, n, h, w, depth, cycles, real'(cycles) / real'(w * h));
    env.checks++;
    if (cycles > bound) begin
      env.failures++;
      $display("%s: slice took %0d cycles, bound %0d", name, cycles, bound);
    end
  endtask

  initial begin
    env.stall_pct = 0;
    env.gap_pct = 0;
    env.reset_dut();
    env.load_weights();
    run("knee MRI", 256, 256, 3, 8, 0);
    run("abdominal CT", 512, 512, 2, 12, 3);
    run("abdominal MRI", 400, 400, 1, 12, 3);
    run("chest CT", 768, 768, 1, 12, 3);
    env.checks++;
    if (env.n_recurrent < 3) begin
      env.failures++;
      $display("too few recurrent slices: %0d", env.n_recurrent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end
endmodule
