// updown_state_gen: internal up/down state, sample strobe and laser output.
//
// A counter runs from 0 to PERIOD-1 on the 50 MHz clock, PERIOD being 50
// (1 MHz modulation, freq_sel = 0) or 500 (100 kHz, freq_sel = 1). The
// up/down state is high, counting up, in the first half of the period and
// low in the second. sample is a one-cycle strobe in the first cycle of each
// period, i.e. at each rising edge of the state: on that clock edge the
// counters are read and restarted.
//
// laser_ttl is the same square wave delayed by phase clock cycles (taken
// modulo the period); it drives the laser's electro-optic modulator. The
// delay lines the laser-on half up with the counting-up half, absorbing the
// laser, detector and flancter latencies; scanning phase over one period
// gives the triangle-shaped response used to choose it.
//
// All three outputs are registered. A change of freq_sel restarts the period.
// From the paper: the clock-driven counter, the two frequencies, the sampling
// at the rising edge and the user phase on the laser output. This design's
// own: duty cycle, phase in clock cycles, restart on a frequency change.
module updown_state_gen
  import lif_pkg::*;
#(
  parameter int unsigned FAST_CYCLES = lif_pkg::PERIOD_FAST,
  parameter int unsigned SLOW_CYCLES = lif_pkg::PERIOD_SLOW,
  localparam int unsigned CW = $clog2(SLOW_CYCLES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               freq_sel,
  input  logic [PHASE_W-1:0] phase,
  output logic               up,
  output logic               sample,
  output logic               laser_ttl
);

  logic [CW-1:0] cnt, cnt_next, period, half, ph_eff, shifted;
  logic          freq_q;

  always_comb begin
    period = freq_sel ? CW'(SLOW_CYCLES) : CW'(FAST_CYCLES);
    half   = period >> 1;
    ph_eff = freq_sel ? CW'(phase % SLOW_CYCLES) : CW'(phase % FAST_CYCLES);
    if (freq_sel != freq_q || cnt >= period - CW'(1)) cnt_next = '0;
    else                                             cnt_next = cnt + CW'(1);
    shifted = (cnt_next >= ph_eff) ? cnt_next - ph_eff : cnt_next + period - ph_eff;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt       <= '0;
      freq_q    <= 1'b0;
      up        <= 1'b0;
      sample    <= 1'b0;
      laser_ttl <= 1'b0;
    end else begin
      cnt       <= cnt_next;
      freq_q    <= freq_sel;
      up        <= cnt_next < half;
      sample    <= cnt_next == '0;
      laser_ttl <= shifted < half;
    end

endmodule
