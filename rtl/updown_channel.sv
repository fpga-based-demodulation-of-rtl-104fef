// updown_channel: the up/down photon counter of one PMT channel.
//
// A single flancter is busy for four clock cycles after each pulse, so on its
// own it would miss photons that arrive close together. The channel therefore
// holds N_FLANCTERS of them: the addresser steers each pulse, through the
// demux, to a flancter that is not busy; each flancter counts up while the
// laser is on and down while it is off; the counts of all N are added.
//
//   pulse_in -> addresser -> demux -> flancter[0..N-1] -> sum over N -> count
//                  ^--------- busy[0..N-1] ---------'
//
// count is the background-subtracted photon count since the last clear (the
// per-period sample strobe). It lags the photons by four clock cycles.
// all_busy is high after a pulse found no free flancter.
// The structure follows the paper's channel diagram; widths are this design's.
module updown_channel #(
  parameter int unsigned N_FLANCTERS = 8,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned SUM_W       = 16,
  localparam int unsigned AW = (N_FLANCTERS > 1) ? $clog2(N_FLANCTERS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pulse_in,
  input  logic                    up,
  input  logic                    clear,
  output logic signed [SUM_W-1:0] count,
  output logic                    all_busy
);

  logic                                  pulse;
  logic [AW-1:0]                         addr;
  logic [N_FLANCTERS-1:0]                busy;
  logic [N_FLANCTERS-1:0]                fl_pulse;
  logic signed [N_FLANCTERS-1:0][CNT_W-1:0] fl_count;

  flancter_addresser #(.N(N_FLANCTERS)) u_addr (
    .rst_n, .pulse_in, .busy, .pulse, .addr, .all_busy
  );

  pulse_demux #(.N(N_FLANCTERS)) u_demux (
    .pulse, .addr, .pulse_out(fl_pulse)
  );

  for (genvar i = 0; i < N_FLANCTERS; i++) begin : g_fl
    flancter #(.CNT_W(CNT_W)) u_fl (
      .clk, .rst_n, .pulse(fl_pulse[i]), .up, .clear,
      .busy(busy[i]), .count(fl_count[i])
    );
  end

  signed_sum #(.N(N_FLANCTERS), .IN_W(CNT_W), .OUT_W(SUM_W)) u_sum (
    .in_vals(fl_count), .sum(count)
  );

endmodule
