// updown_counter_array: the bank of per-channel up/down counters.
//
// CHANNELS identical updown_channel instances share the up/down state and the
// sample strobe; each takes one discriminator pulse train. Bit 0 of pulses is
// channel 1. overrun is the OR of the channels' all_busy flags.
// 32 channels (two 16-element PMTs) as in the paper; the ordering is this
// design's choice.
module updown_counter_array #(
  parameter int unsigned CHANNELS    = 32,
  parameter int unsigned N_FLANCTERS = 8,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned SUM_W       = 16
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [CHANNELS-1:0]                    pulses,
  input  logic                                   up,
  input  logic                                   clear,
  output logic signed [CHANNELS-1:0][SUM_W-1:0]  counts,
  output logic                                   overrun
);

  logic [CHANNELS-1:0] all_busy;

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    updown_channel #(.N_FLANCTERS(N_FLANCTERS), .CNT_W(CNT_W), .SUM_W(SUM_W)) u_ch (
      .clk, .rst_n, .pulse_in(pulses[c]), .up, .clear,
      .count(counts[c]), .all_busy(all_busy[c])
    );
  end

  assign overrun = |all_busy;

endmodule
