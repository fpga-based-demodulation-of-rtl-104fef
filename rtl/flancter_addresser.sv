// flancter_addresser: picks the flancter that takes the next pulse.
//
// The busy lines of the N flancters come in; the address of a free one goes
// out to the demux together with the pulse itself. The address is chosen on
// the falling edge of every pulse, so it is steady while a pulse is high and
// the demux never glitches. The search is round-robin, starting just after
// the flancter that took the last pulse: the first free one wins. When none is
// free, the next in turn is taken, which is the one used longest ago and so
// the first to become free again; all_busy then records that a following
// pulse may be lost.
//
// Timing: the flancter that received a pulse raises busy within the pulse, so
// by the falling edge it is excluded. busy comes partly from the clock domain
// and is sampled asynchronously here; a wrong choice in a metastable moment
// costs at most one pulse.
//
// From the paper: busy lines in, address and pulse out. This design's own: the
// falling-edge update and the round-robin order.
module flancter_addresser #(
  parameter int unsigned N = 8,
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          rst_n,
  input  logic          pulse_in,
  input  logic [N-1:0]  busy,
  output logic          pulse,
  output logic [AW-1:0] addr,
  output logic          all_busy
);

  logic [AW-1:0] next_addr;
  logic          none_free;

  // Candidate k steps after the current address, k = 1 .. N; k = N is the
  // current one. The nearest free candidate wins.
  logic [N-1:0][AW:0] cand;

  always_comb
    for (int k = 1; k <= N; k++)
      cand[k-1] = ({1'b0, addr} + (AW+1)'(k) >= (AW+1)'(N))
                  ? {1'b0, addr} + (AW+1)'(k) - (AW+1)'(N)
                  : {1'b0, addr} + (AW+1)'(k);

  always_comb begin
    next_addr = cand[0][AW-1:0];
    none_free = 1'b1;
    for (int k = N; k >= 1; k--)
      if (!busy[cand[k-1][AW-1:0]]) begin
        next_addr = cand[k-1][AW-1:0];
        none_free = 1'b0;
      end
  end

  always_ff @(negedge pulse_in or negedge rst_n)
    if (!rst_n) begin
      addr     <= '0;
      all_busy <= 1'b0;
    end else begin
      addr     <= next_addr;
      all_busy <= none_free;
    end

  assign pulse = pulse_in;

endmodule
