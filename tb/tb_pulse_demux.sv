// tb_pulse_demux: exhaustive check of the pulse demultiplexer for N = 8:
// every address with the pulse low and high.
`timescale 1ns/1ps
module tb_pulse_demux;
  localparam int N = 8;
  logic       pulse = 1'b0;
  logic [2:0] addr = '0;
  logic [N-1:0] pulse_out;
  int checks = 0, failures = 0;

  pulse_demux #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < N; a++)
      for (int p = 0; p < 2; p++) begin
        logic [N-1:0] exp;
        addr  = 3'(a);
        pulse = p[0];
        #1;
        exp = p[0] ? (N'(1) << a) : '0;
        checks++;
        if (pulse_out !== exp) begin
          failures++;
          $display("FAIL addr=%0d pulse=%0d out=%b exp=%b", a, p, pulse_out, exp);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
