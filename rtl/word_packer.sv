// word_packer: turns the 32 channel counts into one 32-bit FIFO word.
//
// Channels 1-16 (first PMT) and 17-32 (second PMT) are each added with a
// signed_sum, clipped to the signed 16-bit (short int) range and placed side
// by side: channels 17-32 in word[31:16], channels 1-16 in word[15:0].
// Combinational; the word is written to the FIFO on the sample strobe.
// The two sums and the two short ints in one 32-bit word follow the paper's
// block diagram; the half order and the clipping are this design's choices.
module word_packer #(
  parameter int unsigned CHANNELS = 32,
  parameter int unsigned SUM_W    = 16,
  parameter int unsigned HALF_W   = 16,
  localparam int unsigned GROUP   = CHANNELS / 2,
  localparam int unsigned ACC_W   = SUM_W + $clog2(GROUP) + 1
) (
  input  logic signed [CHANNELS-1:0][SUM_W-1:0] counts,
  output logic [2*HALF_W-1:0]                   word
);

  logic signed [ACC_W-1:0] sum_lo, sum_hi;

  signed_sum #(.N(GROUP), .IN_W(SUM_W), .OUT_W(ACC_W)) u_sum_lo (
    .in_vals(counts[GROUP-1:0]), .sum(sum_lo)
  );
  signed_sum #(.N(GROUP), .IN_W(SUM_W), .OUT_W(ACC_W)) u_sum_hi (
    .in_vals(counts[CHANNELS-1:GROUP]), .sum(sum_hi)
  );

  function automatic logic [HALF_W-1:0] clip(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (HALF_W - 1)) - 1);
    localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (HALF_W - 1));
    if (v > MAXV)      return HALF_W'(MAXV);
    else if (v < MINV) return HALF_W'(MINV);
    else               return HALF_W'(v);
  endfunction

  assign word = {clip(sum_hi), clip(sum_lo)};

endmodule
