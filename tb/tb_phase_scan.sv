// tb_phase_scan: the laser phase scan used to set up the demodulator.
//
// At 1 MHz modulation the laser phase offset is stepped through all 50
// settings of one period. For each setting the design acquires a dozen
// periods, which are then read out and checked. The photon model: channels
// 1-4 emit one pulse in every clock cycle in which the laser output was on
// DELAY cycles earlier (laser, fluorescence and cable delay); channels 17-32
// see only random background. In the counters' frame the fluorescence window
// starts at s = (3 + DELAY + phase) mod 50 (3 = flancter latency), so every
// word's low half must be exactly 4 * (25 - 2 * d), d the circular distance of
// s from 0: a triangle in the phase, +100 at phase = 50 - 3 - DELAY, -100
// half a period later. The high half (background only) must average near 0.
`timescale 1ns/1ps
module tb_phase_scan;
  import lif_pkg::*;
  localparam int DELAY = 7;
  localparam int P = PERIOD_FAST;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [31:0] pmt_pulses = '0;
  logic laser_ttl;
  logic [3:0] lb_addr = '0;
  logic lb_wr = 1'b0, lb_rd = 1'b0;
  logic [31:0] lb_wdata = '0, lb_rdata;
  logic lb_ack;
  int checks = 0, failures = 0;
  logic [DELAY-1:0] laser_hist = '0;
  int best_phase = -1, best_val = -1000;

  lif_demod_top dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic emit(input int c);
    #3 pmt_pulses[c] = 1'b1;
    #5 pmt_pulses[c] = 1'b0;
  endtask

  // Photon model, one decision per clock cycle.
  always @(posedge clk) begin
    #1;
    if (laser_hist[DELAY-1])
      for (int c = 0; c < 4; c++) fork
        automatic int cc = c;
        emit(cc);
      join_none
    for (int c = 16; c < 32; c++)
      if ($urandom_range(0, 99) < 5) fork
        automatic int cc = c;
        emit(cc);
      join_none
    laser_hist = {laser_hist[DELAY-2:0], laser_ttl};
  end

  task automatic bus_write(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk) begin lb_addr = a; lb_wdata = d; lb_wr = 1'b1; end
    @(negedge clk) lb_wr = 1'b0;
  endtask

  task automatic bus_read(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk) begin lb_addr = a; lb_rd = 1'b1; end
    @(negedge clk) lb_rd = 1'b0;
    d = lb_rdata;
  endtask

  function automatic int expected(input int ph);
    int s, d;
    s = (3 + DELAY + ph) % P;
    d = (s < P - s) ? s : P - s;
    return 4 * (P / 2 - 2 * d);
  endfunction

  initial begin
    #100ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int n, hi_sum, hi_n;
    hi_sum = 0; hi_n = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #3 rst_n = 1'b1;
    for (int ph = 0; ph < P; ph++) begin
      bus_write(REG_CTRL, (32'(ph) << 16) | 32'(ACQ_IDLE));
      repeat (3 * P) @(negedge clk);
      bus_write(REG_CTRL, (32'(ph) << 16) | 32'(ACQ_ACQUIRE));
      repeat (13 * P) @(negedge clk);
      bus_write(REG_CTRL, (32'(ph) << 16) | 32'(ACQ_IDLE));
      bus_write(REG_CTRL, (32'(ph) << 16) | 32'(ACQ_READOUT));
      bus_read(REG_STATUS, d);
      n = int'(d[31:16]);
      check(n >= 10, $sformatf("phase %0d: %0d words acquired", ph, n));
      for (int i = 0; i < n; i++) begin
        bus_read(REG_FIFO, d);
        check(int'($signed(d[15:0])) == expected(ph),
              $sformatf("phase %0d word %0d: %0d, expected %0d", ph, i, $signed(d[15:0]), expected(ph)));
        if (int'($signed(d[15:0])) > best_val) begin
          best_val   = int'($signed(d[15:0]));
          best_phase = ph;
        end
        hi_sum += int'($signed(d[31:16]));
        hi_n++;
      end
    end
    $display("phase scan: maximum %0d at phase %0d (expected 100 at %0d); background mean %0d/%0d",
             best_val, best_phase, (2 * P - 3 - DELAY) % P, hi_sum, hi_n);
    check(best_phase == (2 * P - 3 - DELAY) % P && best_val == 100, "triangle peak position");
    check(hi_sum < hi_n && hi_sum > -hi_n, "background cancels (|mean| < 1 count per period)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
