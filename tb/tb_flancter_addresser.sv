// tb_flancter_addresser: drives random busy patterns and pulses and checks the
// address chosen on each falling pulse edge against a round-robin model
// (nearest free flancter after the current one; if none, the next in turn),
// the all_busy flag and that the pulse is passed through.
`timescale 1ns/1ps
module tb_flancter_addresser;
  localparam int N = 8;
  logic         rst_n = 1'b1, pulse_in = 1'b0;
  logic [N-1:0] busy = '0;
  logic         pulse, all_busy;
  logic [2:0]   addr;
  int checks = 0, failures = 0;
  int model_addr = 0;

  flancter_addresser #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    #9 rst_n = 1'b1;
    #10 check(addr == 0, "reset address");
    for (int t = 0; t < 400; t++) begin
      int  exp;
      bit  none;
      // Random busy pattern, sometimes all busy.
      busy = (t % 17 == 5) ? '1 : N'($urandom);
      #3 pulse_in = 1'b1;
      #1 check(pulse == 1'b1, "pulse passed through");
      check(int'(addr) == model_addr, "address steady while pulse high");
      none = 1'b1;
      exp  = (model_addr + 1) % N;
      for (int k = N; k >= 1; k--)
        if (!busy[(model_addr + k) % N]) begin
          exp  = (model_addr + k) % N;
          none = 1'b0;
        end
      #4 pulse_in = 1'b0;
      #1;
      check(int'(addr) == exp, $sformatf("address after pulse (busy=%b)", busy));
      check(all_busy == none, "all_busy flag");
      model_addr = exp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
