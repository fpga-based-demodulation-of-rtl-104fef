// tb_word_packer: random channel counts (small, as in normal use, and large,
// to force clipping) are summed per half in the testbench, clipped to the
// signed 16-bit range and compared with both halves of the packed word.
`timescale 1ns/1ps
module tb_word_packer;
  localparam int CH = 32;
  logic signed [CH-1:0][15:0] counts;
  logic [31:0] word;
  int checks = 0, failures = 0;

  word_packer dut (.*);

  function automatic int clip16(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int lo, hi, span;
      lo = 0; hi = 0;
      span = (t % 4 == 3) ? 32767 : 300;
      for (int c = 0; c < CH; c++) begin
        int v;
        v = int'($urandom_range(0, 2 * span)) - span;
        if (t == 0) v = 30000;      // all positive: clip high
        if (t == 1) v = -30000;     // all negative: clip low
        counts[c] = 16'(v);
        if (c < CH / 2) lo += v; else hi += v;
      end
      #1;
      checks++;
      if (word[15:0] !== 16'(clip16(lo)) || word[31:16] !== 16'(clip16(hi))) begin
        failures++;
        $display("FAIL t=%0d word=%h exp hi=%0d lo=%0d", t, word, clip16(hi), clip16(lo));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
