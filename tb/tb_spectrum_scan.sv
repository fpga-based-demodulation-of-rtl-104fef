// tb_spectrum_scan: an absorption-spectrum scan, as used to compare the
// demodulator with a lock-in amplifier.
//
// The laser is stepped over 11 "wavelength" points. At each point the
// fluorescence probability per channel and clock cycle (while the delayed
// laser is on) follows a two-peak line shape; on top, every channel sees a
// background three times stronger than the strongest fluorescence, with
// the laser on or off. For each point the design acquires 400 periods at
// 1 MHz with the phase offset set to the optimum; the host-side average of
// each half-word must match 16 channels * 25 on-cycles * probability within
// five standard errors, and the background must cancel: the dark points
// (zero fluorescence) must average to zero within the same margin.
`timescale 1ns/1ps
module tb_spectrum_scan;
  import lif_pkg::*;
  localparam int DELAY = 7;
  localparam int P = PERIOD_FAST;
  localparam int PHASE = (2 * P - 3 - DELAY) % P;   // optimum from the phase scan
  localparam int NPTS = 11;
  localparam int NPER = 400;
  // fluorescence probability per mille, two Zeeman-split peaks
  localparam int LINE [NPTS] = '{0, 10, 60, 150, 100, 40, 100, 150, 60, 10, 0};
  localparam int BG = 450;   // background per mille per cycle, laser on or off

  logic clk = 1'b0, rst_n = 1'b1;
  logic [31:0] pmt_pulses = '0;
  logic laser_ttl;
  logic [3:0] lb_addr = '0;
  logic lb_wr = 1'b0, lb_rd = 1'b0;
  logic [31:0] lb_wdata = '0, lb_rdata;
  logic lb_ack;
  int checks = 0, failures = 0;
  logic [DELAY-1:0] laser_hist = '0;
  int lif_pm = 0;

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

  // One pulse at most per channel and cycle: fluorescence or background.
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < 32; c++) begin
      int r;
      r = int'($urandom_range(0, 999));
      if ((laser_hist[DELAY-1] && r < lif_pm) || (r >= 999 - BG + 1)) fork
        automatic int cc = c;
        emit(cc);
      join_none
    end
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

  initial begin
    #200ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #3 rst_n = 1'b1;
    bus_write(REG_CTRL, (32'(PHASE) << 16) | 32'(ACQ_IDLE));
    for (int k = 0; k < NPTS; k++) begin
      int n, sum_lo, sum_hi;
      real mean_lo, mean_hi, expect_mean, p, q, var_per, tol;
      lif_pm = LINE[k];
      repeat (3 * P) @(negedge clk);
      bus_write(REG_CTRL, (32'(PHASE) << 16) | 32'(ACQ_ACQUIRE));
      repeat ((NPER + 1) * P + P / 2) @(negedge clk);
      bus_write(REG_CTRL, (32'(PHASE) << 16) | 32'(ACQ_IDLE));
      bus_write(REG_CTRL, (32'(PHASE) << 16) | 32'(ACQ_READOUT));
      bus_read(REG_STATUS, d);
      n = int'(d[31:16]);
      check(n >= NPER - 1, $sformatf("point %0d: %0d words", k, n));
      sum_lo = 0; sum_hi = 0;
      for (int i = 0; i < n; i++) begin
        bus_read(REG_FIFO, d);
        sum_lo += int'($signed(d[15:0]));
        sum_hi += int'($signed(d[31:16]));
      end
      mean_lo = real'(sum_lo) / n;
      mean_hi = real'(sum_hi) / n;
      // per cycle: on-half P(pulse) = p_on, off-half P(pulse) = q
      q = BG / 1000.0;
      p = q + lif_pm / 1000.0;   // disjoint ranges of r
      expect_mean = 16.0 * (P / 2) * (p - q);
      var_per = 16.0 * (P / 2) * (p * (1.0 - p) + q * (1.0 - q));
      tol = 5.0 * $sqrt(var_per / n) + 0.01;
      $display("point %0d: line %0d/1000, mean lo %7.3f hi %7.3f expected %7.3f (tol %5.3f)",
               k, lif_pm, mean_lo, mean_hi, expect_mean, tol);
      check(mean_lo > expect_mean - tol && mean_lo < expect_mean + tol, $sformatf("point %0d low half", k));
      check(mean_hi > expect_mean - tol && mean_hi < expect_mean + tol, $sformatf("point %0d high half", k));
      bus_read(REG_STATUS, d);
      check(!d[4], "no pulses lost");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
