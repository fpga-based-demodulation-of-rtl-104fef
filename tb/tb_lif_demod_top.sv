// tb_lif_demod_top: end-to-end test of the whole demodulator at its default
// size (32 channels, 8 flancters each, 32768-word FIFO).
//
// A photon model drives all 32 channels: in each clock cycle a channel emits
// a pulse with a higher probability while the laser is on than while it is
// off (LIF on top of background), sometimes two pulses 10 ns apart so that a
// second flancter must take the second one. The testbench follows the
// modulation period from the laser_ttl output and the known phase offset,
// keeps the pulses away from the half-period edges by more than the 4-cycle
// counting latency, and so knows the exact expected word of every period:
// (on-pulses - off-pulses) summed over channels 1-16 (low half) and 17-32
// (high half).
//
// Run A: 100 kHz, phase offset 137 cycles. Acquisition is started, an
//        overload burst is sent on one channel (overrun flag), and the run is
//        stopped by an IDLE command; every word is read in READOUT.
// Run B: 1 MHz, phase offset 0. Acquisition runs until the FIFO is full and
//        the controller stops by itself; all 32768 words are read and checked.
// Mechanisms counted (each must occur): double pulses within one cycle,
// overrun, frequency switch, non-zero phase, stop on full, readout.
`timescale 1ns/1ps
module tb_lif_demod_top;
  import lif_pkg::*;
  localparam int CH = 32;
  localparam int DEPTH = 32768;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [CH-1:0] pmt_pulses = '0;
  logic laser_ttl;
  logic [3:0] lb_addr = '0;
  logic lb_wr = 1'b0, lb_rd = 1'b0;
  logic [31:0] lb_wdata = '0, lb_rdata;
  logic lb_ack;

  lif_demod_top dut (.*);

  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_double = 0, n_overrun = 0, n_freq_switch = 0, n_phase = 0, n_full_stop = 0, n_readout = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- bus
  task automatic bus_write(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk) begin lb_addr = a; lb_wdata = d; lb_wr = 1'b1; end
    @(negedge clk) lb_wr = 1'b0;
  endtask

  task automatic bus_read(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk) begin lb_addr = a; lb_rd = 1'b1; end
    @(negedge clk) lb_rd = 1'b0;
    d = lb_rdata;
  endtask

  function automatic logic [31:0] ctrl_word(input acq_state_t m, input bit fs, input int ph);
    return (32'(ph) << 16) | (32'(fs) << 2) | 32'(m);
  endfunction

  // ------------------------------------------------------- period tracking
  int  period_len = PERIOD_FAST;   // current modulation period, cycles
  int  phase_cfg  = 0;             // configured laser phase offset
  bit  tracking   = 1'b0;          // j is valid
  int  j = 0;                      // cycle index within the period
  int  period_no = 0;              // increments when j wraps to 0
  bit  laser_prev = 1'b0;
  bit  gen_on = 1'b0;              // photon model enabled
  int  overload_period = -1;       // period whose channel-1..16 sum is unknown
  int  overload_req = 0;           // request an overload burst

  // expected words per period number
  int exp_lo [int], exp_hi [int];
  int cur_lo = 0, cur_hi = 0;

  task automatic emit(input int c, input int at_ns);
    #(at_ns);
    pmt_pulses[c] = 1'b1;
    #5 pmt_pulses[c] = 1'b0;
  endtask

  always @(posedge clk) begin
    #1;
    if (tracking) begin
      j = (j + 1 == period_len) ? 0 : j + 1;
      if (j == 0) begin
        exp_lo[period_no] = cur_lo;
        exp_hi[period_no] = cur_hi;
        cur_lo = 0; cur_hi = 0;
        period_no++;
      end
    end
    if (laser_ttl && !laser_prev) begin
      if (tracking)
        check(j == phase_cfg % period_len, "laser edge where the phase offset puts it");
      else begin
        tracking = 1'b1;
        j = phase_cfg % period_len;
        cur_lo = 0; cur_hi = 0;
        // the period that starts at j == 0 next gets a fresh number
      end
    end
    laser_prev = laser_ttl;

    if (gen_on && tracking) begin
      int  half, dir;
      half = period_len / 2;
      dir  = (j <= half - 8) ? 1 : ((j >= half && j <= period_len - 8) ? -1 : 0);
      if (dir != 0) begin
        for (int c = 0; c < CH; c++) begin
          int r, n;
          r = int'($urandom_range(0, 999));
          n = 0;
          if (dir == 1 && r < 90) n = 1;
          if (dir == -1 && r < 30) n = 1;
          if (r >= 990) begin n = 2; n_double++; end
          if (n >= 1) fork emit(c, 1); join_none
          if (n == 2) fork emit(c, 11); join_none
          if (c < CH / 2) cur_lo += dir * n; else cur_hi += dir * n;
        end
      end
      if (overload_req > 0 && j == 10) begin
        overload_req = 0;
        overload_period = period_no;
        for (int k = 0; k < 20; k++) fork
          automatic int kk = k;
          emit(3, 1 + 6 * kk);
        join_none
      end
    end
  end

  task automatic wait_j(input int target);
    do @(negedge clk); while (!(tracking && j == target));
  endtask

  // Change frequency and phase while idle, then resynchronise the tracker.
  task automatic configure(input bit fs, input int ph);
    gen_on = 1'b0;
    bus_write(REG_CTRL, ctrl_word(ACQ_IDLE, fs, ph));
    tracking   = 1'b0;
    period_len = fs ? PERIOD_SLOW : PERIOD_FAST;
    phase_cfg  = ph;
    repeat (3 * PERIOD_SLOW) @(negedge clk);
    check(tracking, "laser output running");
  endtask

  // Read 'n' words in READOUT and compare with periods first..first+n-1.
  task automatic readout(input bit fs, input int ph, input int first, input int n, input bit mask_overload);
    logic [31:0] d;
    bus_write(REG_CTRL, ctrl_word(ACQ_READOUT, fs, ph));
    bus_read(REG_STATUS, d);
    check(d[1:0] == 2'(ACQ_READOUT), "in READOUT");
    check(int'(d[31:16]) == (n > 65535 ? 65535 : n), $sformatf("FIFO level %0d, expected %0d", d[31:16], n));
    for (int i = 0; i < n; i++) begin
      int p;
      p = first + i;
      bus_read(REG_FIFO, d);
      n_readout++;
      if (!(mask_overload && p == overload_period))
        check($signed(d[15:0]) == 16'(exp_lo[p]),
              $sformatf("word %0d low half %0d, expected %0d", i, $signed(d[15:0]), exp_lo[p]));
      check($signed(d[31:16]) == 16'(exp_hi[p]),
            $sformatf("word %0d high half %0d, expected %0d", i, $signed(d[31:16]), exp_hi[p]));
    end
    bus_read(REG_STATUS, d);
    check(d[3], "FIFO empty after readout");
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
    int first, last;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #3 rst_n = 1'b1;
    bus_read(REG_ID, d);
    check(d == DESIGN_ID, "ID register");

    // ---------------- run A: 100 kHz, phase 137, stopped by command
    configure(1'b1, 137);
    n_freq_switch++;
    n_phase++;
    gen_on = 1'b1;
    wait_j(PERIOD_SLOW / 2);
    bus_write(REG_CTRL, ctrl_word(ACQ_ACQUIRE, 1'b1, 137));
    first = period_no + 1;
    repeat (3) begin wait_j(0); wait_j(5); end
    overload_req = 1;
    repeat (30) begin wait_j(0); wait_j(5); end
    wait_j(PERIOD_SLOW / 2);
    bus_write(REG_CTRL, ctrl_word(ACQ_IDLE, 1'b1, 137));
    last = period_no - 1;
    gen_on = 1'b0;
    bus_read(REG_STATUS, d);
    if (d[4]) n_overrun++;
    check(d[4], "overrun flagged after overload burst");
    check(overload_period >= first && overload_period <= last, "overload inside the run");
    readout(1'b1, 137, first, last - first + 1, 1'b1);
    $display("run A: %0d words checked", last - first + 1);

    // ---------------- run B: 1 MHz, phase 0, until the FIFO is full
    configure(1'b0, 0);
    n_freq_switch++;
    gen_on = 1'b1;
    wait_j(PERIOD_FAST / 2);
    bus_write(REG_CTRL, ctrl_word(ACQ_ACQUIRE, 1'b0, 0));
    first = period_no + 1;
    do begin
      repeat (1000) @(negedge clk);
      bus_read(REG_STATUS, d);
    end while (d[1:0] == 2'(ACQ_ACQUIRE));
    gen_on = 1'b0;
    check(d[2] && d[1:0] == 2'(ACQ_IDLE), "stopped by itself with the FIFO full");
    if (d[2] && d[1:0] == 2'(ACQ_IDLE)) n_full_stop++;
    check(!d[4], "no overrun in run B");
    readout(1'b0, 0, first, DEPTH, 1'b0);
    $display("run B: %0d words checked", DEPTH);

    $display("mechanisms: double=%0d overrun=%0d freq_switch=%0d phase=%0d full_stop=%0d readout=%0d",
             n_double, n_overrun, n_freq_switch, n_phase, n_full_stop, n_readout);
    check(n_double > 0, "double pulses happened");
    check(n_overrun > 0, "overrun happened");
    check(n_freq_switch > 1, "frequency switched");
    check(n_phase > 0, "phase offset used");
    check(n_full_stop > 0, "stop on full happened");
    check(n_readout > 0, "readout happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
