// tb_signed_sum: random and corner-case vectors for the signed adder
// (N = 8 inputs of 16 bits, 20-bit result), compared with an integer sum.
`timescale 1ns/1ps
module tb_signed_sum;
  localparam int N = 8, IN_W = 16, OUT_W = 20;
  logic signed [N-1:0][IN_W-1:0] in_vals;
  logic signed [OUT_W-1:0]       sum;
  int checks = 0, failures = 0;

  signed_sum #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int exp;
      exp = 0;
      for (int i = 0; i < N; i++) begin
        int v;
        case (t)
          0: v = -32768;
          1: v = 32767;
          2: v = (i % 2) ? -1 : 1;
          default: v = int'($urandom_range(0, 65535)) - 32768;
        endcase
        in_vals[i] = IN_W'(v);
        exp += v;
      end
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        $display("FAIL t=%0d sum=%0d exp=%0d", t, sum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
