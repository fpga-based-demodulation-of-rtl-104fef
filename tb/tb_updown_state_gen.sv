// tb_updown_state_gen: checks the up/down square wave, its period (50 cycles
// at 1 MHz, 500 at 100 kHz) and 50 % duty, the sample strobe at each rising
// edge of the state, and that laser_ttl equals the state delayed by exactly
// phase clock cycles (modulo the period).
`timescale 1ns/1ps
module tb_updown_state_gen;
  import lif_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, freq_sel = 1'b0;
  logic [PHASE_W-1:0] phase = '0;
  logic up, sample, laser_ttl;
  int checks = 0, failures = 0;
  logic hist [$];

  updown_state_gen dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Run 'periods' periods of length 'per' after settling, checking all outputs.
  task automatic run(input bit fs, input int ph, input int per);
    int last_rise, high_cnt, cyc;
    bit up_prev;
    freq_sel = fs;
    phase    = PHASE_W'(ph);
    // settle: two periods
    repeat (2 * per + 2) @(posedge clk);
    hist.delete();
    last_rise = -1; high_cnt = 0; cyc = 0; up_prev = up;
    repeat (4 * per) begin
      @(posedge clk); #1;
      hist.push_back(up);
      if (up && !up_prev) begin
        if (last_rise >= 0) begin
          check(cyc - last_rise == per, $sformatf("period %0d (fs=%0b)", cyc - last_rise, fs));
          check(high_cnt == per / 2, $sformatf("duty %0d of %0d", high_cnt, per));
        end
        last_rise = cyc;
        high_cnt  = 0;
      end
      check(sample == (up && !up_prev), "sample at rising edge of state");
      if (up) high_cnt++;
      if (hist.size() > ph % per)
        check(laser_ttl == hist[hist.size() - 1 - (ph % per)],
              $sformatf("laser_ttl delayed by %0d", ph % per));
      up_prev = up;
      cyc++;
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #3 rst_n = 1'b1;
    run(1'b0, 0, 50);
    run(1'b0, 13, 50);
    run(1'b0, 60, 50);   // taken modulo 50
    run(1'b1, 0, 500);
    run(1'b1, 377, 500);
    run(1'b0, 49, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
