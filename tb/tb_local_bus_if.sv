// tb_local_bus_if: bus accesses against the register map. Writes and reads
// back the control register and checks the decoded mode, frequency and phase
// outputs and the one-cycle command strobe; reads status and ID; reads the
// FIFO port in READOUT (pop strobe and data returned) and outside READOUT or
// when empty (no pop, zero returned). A small FIFO model stands behind it.
`timescale 1ns/1ps
module tb_local_bus_if;
  import lif_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [3:0] lb_addr = '0;
  logic lb_wr = 1'b0, lb_rd = 1'b0;
  logic [31:0] lb_wdata = '0, lb_rdata;
  logic lb_ack;
  acq_state_t cmd, state = ACQ_IDLE;
  logic cmd_valid, freq_sel;
  logic [PHASE_W-1:0] phase;
  logic overrun = 1'b0, fifo_full = 1'b0, fifo_empty;
  logic [15:0] fifo_level;
  logic fifo_re;
  logic [31:0] fifo_rdata;
  int checks = 0, failures = 0, cmd_pulses = 0, pops = 0;
  logic [31:0] fifo_model [$];

  local_bus_if dut (.*);

  always #10 clk = ~clk;

  // FIFO model with one-cycle read latency.
  assign fifo_empty = fifo_model.size() == 0;
  assign fifo_level = 16'(fifo_model.size());
  always @(posedge clk) begin
    if (cmd_valid) cmd_pulses++;
    if (fifo_re) begin
      fifo_rdata <= fifo_model.pop_front();
      pops++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic bus_write(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk) begin lb_addr = a; lb_wdata = d; lb_wr = 1'b1; end
    @(negedge clk) lb_wr = 1'b0;
    check(lb_ack, "write ack");
  endtask

  task automatic bus_read(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk) begin lb_addr = a; lb_rd = 1'b1; end
    @(negedge clk) lb_rd = 1'b0;
    check(lb_ack, "read ack");
    d = lb_rdata;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #3 rst_n = 1'b1;

    // control register: mode = ACQUIRE, 100 kHz, phase 300
    bus_write(REG_CTRL, (32'd300 << 16) | 32'h4 | 32'h1);
    check(cmd == ACQ_ACQUIRE && freq_sel && phase == 9'd300, "control fields");
    @(negedge clk) check(cmd_pulses == 1, "one command strobe");
    bus_read(REG_CTRL, d);
    check(d == ((32'd300 << 16) | 32'h5), "control read back");
    bus_write(REG_CTRL, (32'd17 << 16) | 32'h2);
    check(cmd == ACQ_READOUT && !freq_sel && phase == 9'd17, "control fields 2");
    @(negedge clk) check(cmd_pulses == 2, "second command strobe");

    bus_read(REG_ID, d);
    check(d == DESIGN_ID, "ID register");

    for (int i = 0; i < 6; i++) fifo_model.push_back($urandom);
    state = ACQ_IDLE; overrun = 1'b1; fifo_full = 1'b1;
    bus_read(REG_STATUS, d);
    check(d[1:0] == 2'(ACQ_IDLE) && d[2] && !d[3] && d[4] && d[31:16] == 16'd6, "status register");
    bus_read(REG_FIFO, d);
    check(d == 0 && pops == 0, "no pop outside READOUT");

    state = ACQ_READOUT; overrun = 1'b0; fifo_full = 1'b0;
    while (fifo_model.size() > 0) begin
      logic [31:0] e;
      e = fifo_model[0];
      bus_read(REG_FIFO, d);
      check(d == e, $sformatf("FIFO word %h vs %h", d, e));
    end
    check(pops == 6, "six pops");
    bus_read(REG_FIFO, d);
    check(d == 0 && pops == 6, "no pop when empty");
    bus_read(REG_STATUS, d);
    check(d[1:0] == 2'(ACQ_READOUT) && d[3] && !d[4] && d[31:16] == 0, "status after drain");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
