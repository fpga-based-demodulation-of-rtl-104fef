// tb_flancter: self-checking test of one flancter.
//
// Sends single 5 ns pulses at random points inside a 20 ns clock period and
// checks that busy rises at once, that the count does not move on the first
// three clock edges, that it steps by +1 (up) or -1 (down) on the fourth and
// that busy is low again after it. Also checks that a pulse arriving while
// busy is lost, and that clear restarts the count from the step of the same
// cycle.
`timescale 1ns/1ps
module tb_flancter;
  localparam int CNT_W = 16;
  logic clk = 1'b0, rst_n = 1'b1, pulse = 1'b0, up = 1'b1, clear = 1'b0;
  logic busy;
  logic signed [CNT_W-1:0] count;
  int checks = 0, failures = 0;
  int ref_count = 0;

  flancter #(.CNT_W(CNT_W)) dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (count=%0d ref=%0d busy=%0b) at %0t", what, count, ref_count, busy, $time);
    end
  endtask

  task automatic send_pulse(input int offset_ns);
    @(posedge clk);
    #(offset_ns);
    pulse = 1'b1;
    #5 pulse = 1'b0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #3 rst_n = 1'b1;
    repeat (2) @(posedge clk);
    #1 check(count == 0 && !busy, "reset state");

    // Single pulses, random position and direction.
    for (int n = 0; n < 40; n++) begin
      int off;
      off = 2 + int'($urandom_range(0, 11));
      up  = $urandom_range(0, 1) == 1;
      send_pulse(off);
      #1 check(busy, "busy right after pulse");
      for (int e = 1; e <= 3; e++) begin
        @(posedge clk); #1;
        check(count == CNT_W'(ref_count), $sformatf("no step on edge %0d", e));
        check(busy, $sformatf("busy on edge %0d", e));
      end
      @(posedge clk); #1;
      ref_count += up ? 1 : -1;
      check(count == CNT_W'(ref_count), "step on 4th edge");
      check(!busy, "free after 4th edge");
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end

    // A second pulse while busy is lost.
    up = 1'b1;
    send_pulse(4);
    repeat (2) @(posedge clk);
    #4 pulse = 1'b1;
    #5 pulse = 1'b0;
    repeat (8) @(posedge clk);
    #1 ref_count += 1;
    check(count == CNT_W'(ref_count), "pulse during busy is lost");

    // clear on an idle cycle returns to 0.
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    ref_count = 0;
    check(count == 0, "clear while idle");

    // clear on the counting edge keeps that step.
    up = 1'b0;
    send_pulse(5);
    repeat (3) @(posedge clk);
    #1 clear = 1'b1;
    @(posedge clk); #1 clear = 1'b0;
    check(count == -1, "clear keeps the step of its own cycle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
