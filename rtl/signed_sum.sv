// signed_sum: adds N signed values into one signed result.
//
// Used twice in the design: to add the counts of the N flancters of one
// channel, and to add the counts of the 16 channels of one PMT. Inputs are
// sign-extended to OUT_W and added; the result wraps if OUT_W is too small, so
// callers size OUT_W for the worst case. Combinational, no latency.
// The sums are the paper's; the adder form and widths are this design's.
module signed_sum #(
  parameter int unsigned N     = 8,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 16
) (
  input  logic signed [N-1:0][IN_W-1:0] in_vals,
  output logic signed [OUT_W-1:0]       sum
);

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++)
      sum += OUT_W'(signed'(in_vals[i]));
  end

endmodule
