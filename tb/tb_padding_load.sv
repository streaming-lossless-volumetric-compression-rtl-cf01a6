// tb_padding_load: streams two slices of different sizes through the
// padding stage with random input gaps and output stalls and checks every
// output word against the padded image (zero border of PAD words, TAIL_ROWS
// extra zero rows) and the out_last flag on the final word of each slice.
module tb_padding_load;
  localparam int PAD = 2, TAIL = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] cfg_w, cfg_h;
  logic        in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [15:0] in_data = 0, out_data;
  int checks = 0, failures = 0;

  padding_load #(.DATA_W(16), .PAD(PAD), .TAIL_ROWS(TAIL), .MAX_W(16), .MAX_H(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ow, oh, orow, ocol, slices_done;
  function automatic logic [15:0] pix(int r, int c, int s);
    return 16'(1000 * s + 37 * r + c + 1);
  endfunction

  int cur_slice = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      automatic int r = orow - PAD, c = ocol - PAD;
      automatic logic [15:0] e;
      automatic logic el;
      e  = (r >= 0 && r < oh && c >= 0 && c < ow) ? pix(r, c, cur_slice) : 16'h0;
      el = (orow == oh + 2*PAD + TAIL - 1) && (ocol == ow + 2*PAD - 1);
      checks++;
      if (out_data !== e || out_last !== el) begin
        failures++;
        $display("slice %0d (%0d,%0d): got %h/%0b expected %h/%0b", cur_slice, orow, ocol, out_data, out_last, e, el);
      end
      if (ocol == ow + 2*PAD - 1) begin
        ocol = 0;
        if (orow == oh + 2*PAD + TAIL - 1) begin orow = 0; cur_slice++; slices_done++; end
        else orow++;
      end else ocol++;
    end
  end

  task automatic run_slice(int w, int h, int s);
    cfg_w = 16'(w); cfg_h = 16'(h); ow = w; oh = h;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        @(negedge clk);
        in_valid = 1; in_data = pix(r, c, s);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
      end
    @(negedge clk); in_valid = 0;
    while (slices_done != s + 1) @(posedge clk);
  endtask

  initial begin
    orow = 0; ocol = 0; slices_done = 0;
    cfg_w = 5; cfg_h = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_slice(5, 4, 0);
    run_slice(9, 3, 1);
    checks++;
    if (slices_done != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
