// tb_updown_counter_array: all 32 channels at once. Each channel gets its own
// random number of pulses (at random offsets, never closer than 10 ns on one
// channel) in an up phase and then in a down phase; every channel's count must
// equal its up pulses minus its down pulses. overrun must stay low.
`timescale 1ns/1ps
module tb_updown_counter_array;
  localparam int CH = 32;
  logic clk = 1'b0, rst_n = 1'b1, up = 1'b1, clear = 1'b0;
  logic [CH-1:0] pulses = '0;
  logic signed [CH-1:0][15:0] counts;
  logic overrun;
  int checks = 0, failures = 0;
  int n_up [CH], n_dn [CH];

  updown_counter_array dut (.*);

  always #10 clk = ~clk;

  // Drive channel c with n pulses spaced 10..40 ns, starting after 'start' ns.
  task automatic drive(input int c, input int n, input int start);
    #(start);
    for (int i = 0; i < n; i++) begin
      pulses[c] = 1'b1;
      #5 pulses[c] = 1'b0;
      #($urandom_range(5, 35));
    end
  endtask

  task automatic phase_run(input bit dir, ref int n [CH]);
    up = dir;
    for (int c = 0; c < CH; c++) n[c] = int'($urandom_range(0, 12));
    for (int c = 0; c < CH; c++)
      fork
        automatic int cc = c;
        drive(cc, n[cc], int'($urandom_range(1, 30)));
      join_none
    wait fork;
    repeat (6) @(posedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #3 rst_n = 1'b1;
    for (int round = 0; round < 5; round++) begin
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      phase_run(1'b1, n_up);
      phase_run(1'b0, n_dn);
      #1;
      for (int c = 0; c < CH; c++) begin
        checks++;
        if (int'(signed'(counts[c])) != n_up[c] - n_dn[c]) begin
          failures++;
          $display("FAIL round %0d ch %0d count=%0d exp=%0d", round, c, signed'(counts[c]), n_up[c] - n_dn[c]);
        end
      end
      checks++;
      if (overrun) begin
        failures++;
        $display("FAIL unexpected overrun");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
