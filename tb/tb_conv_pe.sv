// tb_conv_pe: random data, weights and biases through a full 7x7 PE and a
// masked (4 rows, 3 taps in the last) PE; each result is compared with a
// plain sum of products computed here in 64-bit integers, shifted right by
// FRAC and saturated.  Large operands are included so saturation is hit.
module tb_conv_pe;
  import srlvc_pkg::*;

  word_t d7 [7][7], w7 [7][7], b7, y7;
  word_t d4 [4][7], w4 [4][7], b4, y4;
  int checks = 0, failures = 0, sat_hits = 0;

  conv_pe #(.ROWS(7), .COLS(7), .LAST_COLS(7)) u_full (.d(d7), .w(w7), .bias(b7), .y(y7));
  conv_pe #(.ROWS(4), .COLS(7), .LAST_COLS(3)) u_mask (.d(d4), .w(w4), .bias(b4), .y(y4));

  function automatic int ref_out(longint sum);
    longint v = sum >>> FRAC;
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic word_t rnd(bit big);
    return big ? word_t'($urandom) : word_t'($urandom_range(0, 4095) - 2048);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic bit big = (t % 10 == 9);
      automatic longint s7 = 0, s4 = 0;
      for (int r = 0; r < 7; r++)
        for (int c = 0; c < 7; c++) begin
          d7[r][c] = rnd(big); w7[r][c] = rnd(big);
          if (r < 4) begin d4[r][c] = rnd(big); w4[r][c] = rnd(big); end
        end
      b7 = rnd(big); b4 = rnd(big);
      #1;
      for (int r = 0; r < 7; r++)
        for (int c = 0; c < 7; c++) begin
          s7 += longint'(d7[r][c]) * longint'(w7[r][c]);
          if (r < 3 || (r == 3 && c < 3)) s4 += longint'(d4[r][c]) * longint'(w4[r][c]);
        end
      s7 += longint'(b7) <<< FRAC;
      s4 += longint'(b4) <<< FRAC;
      checks += 2;
      if (int'(y7) != ref_out(s7)) begin failures++; $display("full: got %0d exp %0d", y7, ref_out(s7)); end
      if (int'(y4) != ref_out(s4)) begin failures++; $display("masked: got %0d exp %0d", y4, ref_out(s4)); end
      if (ref_out(s7) == 32767 || ref_out(s7) == -32768) sat_hits++;
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
