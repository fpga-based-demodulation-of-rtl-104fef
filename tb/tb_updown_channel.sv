// tb_updown_channel: one channel with its default 8 flancters.
//
// Bursts of pulses are sent with the direction held constant during each
// burst. Pulses 10-30 ns apart overlap the 80 ns busy time of a flancter, so
// they are only all counted if the addresser spreads them over several
// flancters. After each burst the count must have moved by exactly the number
// of pulses (up or down). The count must also settle exactly four clock
// edges after a lone pulse, restart on clear, and a burst denser than eight
// flancters can absorb must raise all_busy and lose pulses. Pulses from 3 ns
// to 150 ns wide must each count once.
`timescale 1ns/1ps
module tb_updown_channel;
  logic clk = 1'b0, rst_n = 1'b1, pulse_in = 1'b0, up = 1'b1, clear = 1'b0;
  logic signed [15:0] count;
  logic all_busy;
  int checks = 0, failures = 0;
  int ref_count = 0;
  bit seen_all_busy = 1'b0;

  always @(posedge all_busy) seen_all_busy = 1'b1;

  updown_channel dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (count=%0d ref=%0d) at %0t", what, count, ref_count, $time);
    end
  endtask

  task automatic burst(input int n, input int min_gap, input int max_gap);
    for (int i = 0; i < n; i++) begin
      pulse_in = 1'b1;
      #5 pulse_in = 1'b0;
      #($urandom_range(min_gap, max_gap) - 5);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #3 rst_n = 1'b1;
    @(posedge clk); #1 check(count == 0, "reset");

    // Latency of a lone pulse.
    @(posedge clk); #6 burst(1, 20, 20);
    repeat (2) @(posedge clk);
    #1 check(count == 0, "not counted before edge 4");
    @(posedge clk); #1 ref_count = 1;
    check(count == 1, "counted on edge 4");

    // Bursts with gaps shorter than the busy time of one flancter.
    for (int b = 0; b < 30; b++) begin
      int n;
      up = $urandom_range(0, 1) == 1;
      n  = int'($urandom_range(1, 20));
      @(posedge clk); #($urandom_range(1, 15));
      burst(n, 10, 30);
      repeat (6) @(posedge clk);
      #1 ref_count += up ? n : -n;
      check(count == 16'(ref_count), $sformatf("burst %0d of %0d pulses", b, n));
      check(!all_busy, "no flancter shortage at >= 10 ns spacing");
    end

    // Pulses of very different widths (3 ns to 150 ns) are each counted once.
    for (int b = 0; b < 10; b++) begin
      int n;
      up = $urandom_range(0, 1) == 1;
      n  = int'($urandom_range(1, 6));
      @(posedge clk); #($urandom_range(1, 15));
      for (int i = 0; i < n; i++) begin
        pulse_in = 1'b1;
        #($urandom_range(3, 150)) pulse_in = 1'b0;
        #($urandom_range(5, 30));
      end
      repeat (6) @(posedge clk);
      #1 ref_count += up ? n : -n;
      check(count == 16'(ref_count), $sformatf("wide-pulse burst %0d of %0d pulses", b, n));
    end

    // clear restarts the count.
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    ref_count = 0;
    check(count == 0, "clear");

    // Overload: 20 pulses 6 ns apart, more than 8 flancters can take.
    up = 1'b1;
    seen_all_busy = 1'b0;
    @(posedge clk); #2 burst(20, 6, 6);
    repeat (6) @(posedge clk);
    #1 check(seen_all_busy, "all_busy raised under overload");
    check(count >= 8 && count < 20, "overload loses pulses but keeps >= 8");
    $display("overload: %0d of 20 pulses counted", count);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
