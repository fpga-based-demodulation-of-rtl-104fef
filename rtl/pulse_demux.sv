// pulse_demux: routes a channel's pulse train to one of N flancters.
//
// Output i carries the pulse when addr == i and is low otherwise: an address
// decoder AND-ed with the pulse. The addresser changes addr only while the
// pulse is low, so no output sees a glitch. Purely combinational.
// The block and its inputs (pulse, address) are from the paper's channel
// diagram; the decoder is the simplest circuit that does the job.
module pulse_demux #(
  parameter int unsigned N = 8,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          pulse,
  input  logic [AW-1:0] addr,
  output logic [N-1:0]  pulse_out
);

  always_comb
    for (int i = 0; i < N; i++)
      pulse_out[i] = pulse && (addr == AW'(i));

endmodule
