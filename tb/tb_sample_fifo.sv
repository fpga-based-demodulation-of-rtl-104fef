// tb_sample_fifo: the full 32k-word FIFO against a queue model. Random
// interleaved writes and reads, a fill to exactly 32768 words (full, further
// writes dropped), a complete drain (read data and order checked, empty,
// reads of an empty FIFO ignored), and a flush.
`timescale 1ns/1ps
module tb_sample_fifo;
  localparam int DEPTH = 32768;
  logic clk = 1'b0, rst_n = 1'b1, flush = 1'b0, we = 1'b0, re = 1'b0;
  logic [31:0] wdata = '0, rdata;
  logic full, empty;
  logic [15:0] level;
  int checks = 0, failures = 0;
  logic [31:0] model [$];
  logic [31:0] exp_rd;
  bit          rd_pend = 1'b0;

  sample_fifo dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // One clock cycle with the given strobes; updates the model.
  task automatic cycle(input bit w, input bit r);
    we = w; re = r; wdata = $urandom;
    @(posedge clk);
    if (r && model.size() > 0) begin
      exp_rd  = model.pop_front();
      rd_pend = 1'b1;
    end else rd_pend = 1'b0;
    if (w && model.size() < DEPTH) model.push_back(wdata);
    #1;
    if (rd_pend) check(rdata == exp_rd, "read data");
    check(int'(level) == model.size(), $sformatf("level %0d vs %0d", level, model.size()));
    check(full == (model.size() == DEPTH), "full flag");
    check(empty == (model.size() == 0), "empty flag");
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #3 rst_n = 1'b1;
    #1 check(empty && level == 0, "empty after reset");
    repeat (2000) cycle($urandom_range(0, 1) == 1, $urandom_range(0, 1) == 1);
    while (!full) cycle(1'b1, 1'b0);
    repeat (5) cycle(1'b1, 1'b0);     // dropped
    while (!empty) cycle(1'b0, 1'b1);
    repeat (5) cycle(1'b0, 1'b1);     // ignored
    repeat (100) cycle(1'b1, 1'b0);
    @(negedge clk) flush = 1'b1;
    @(negedge clk) flush = 1'b0;
    model.delete();
    check(empty && level == 0, "flush empties");
    repeat (500) cycle($urandom_range(0, 3) != 0, $urandom_range(0, 1) == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
