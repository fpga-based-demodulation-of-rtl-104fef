// tb_acq_fsm: walks the acquisition controller through its states.
// Checks that a start command flushes the FIFO, that the first sample strobe
// after the start writes nothing and each later one writes exactly one word,
// that the FSM drops to IDLE when the FIFO is full, that READOUT and IDLE
// commands are obeyed and never write, and that the overrun flag is
// synchronised, sticky and cleared by the next start.
`timescale 1ns/1ps
module tb_acq_fsm;
  import lif_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  acq_state_t cmd = ACQ_IDLE, state;
  logic cmd_valid = 1'b0, sample = 1'b0, fifo_full = 1'b0, overrun_in = 1'b0;
  logic fifo_we, fifo_flush, overrun;
  int checks = 0, failures = 0;
  int writes = 0, flushes = 0;

  acq_fsm dut (.*);

  always #10 clk = ~clk;
  always @(posedge clk) begin
    if (fifo_we) writes++;
    if (fifo_flush) flushes++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (state=%s writes=%0d) at %0t", what, state.name(), writes, $time);
    end
  endtask

  task automatic command(input acq_state_t c);
    @(negedge clk) begin cmd = c; cmd_valid = 1'b1; end
    @(negedge clk) cmd_valid = 1'b0;
  endtask

  task automatic strobes(input int n);
    repeat (n) begin
      repeat (4) @(negedge clk);
      sample = 1'b1;
      @(negedge clk) sample = 1'b0;
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
    repeat (2) @(posedge clk);
    #3 rst_n = 1'b1;
    check(state == ACQ_IDLE, "idle after reset");
    strobes(3);
    check(writes == 0, "no write while idle");

    command(ACQ_ACQUIRE);
    check(state == ACQ_ACQUIRE, "acquire");
    @(negedge clk) check(flushes == 1, "start flushes the FIFO");
    strobes(1);
    check(writes == 0, "first strobe only starts a period");
    strobes(10);
    check(writes == 10, "one word per later strobe");

    // overrun: synchronised and sticky
    @(negedge clk) overrun_in = 1'b1;
    @(negedge clk) overrun_in = 1'b0;
    repeat (3) @(negedge clk);
    check(overrun, "overrun caught");
    repeat (10) @(negedge clk);
    check(overrun, "overrun sticky");

    // FIFO full ends the acquisition
    @(negedge clk) fifo_full = 1'b1;
    strobes(2);
    check(writes == 10, "no write when full");
    check(state == ACQ_IDLE, "full -> idle");

    command(ACQ_READOUT);
    fifo_full = 1'b0;
    check(state == ACQ_READOUT, "readout");
    strobes(3);
    check(writes == 10, "no write in readout");

    command(ACQ_ACQUIRE);
    repeat (3) @(negedge clk);
    check(!overrun, "start clears overrun");
    check(flushes == 2, "second flush");
    strobes(4);
    check(writes == 13, "restart writes after one strobe");
    command(ACQ_IDLE);
    check(state == ACQ_IDLE, "idle command");
    strobes(2);
    check(writes == 13, "no write after stop");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
