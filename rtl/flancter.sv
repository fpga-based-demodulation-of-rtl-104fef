// flancter: one photon-pulse catcher with its own up/down counter.
//
// An asynchronous discriminator pulse (a few ns wide, far shorter than the
// 20 ns clock period) cannot be sampled by the 50 MHz clock. A Flancter, a
// twisted pair of flip-flops, catches it instead: the set flop is clocked by
// the pulse itself and loads NOT reset_q; the reset flop is clocked by clk and
// loads set_q. Their XOR is a flag that rises on the pulse and falls when the
// clock side acknowledges it.
//
// A small state machine in the clock domain takes the capture through four
// clock edges, as the paper describes:
//   edge 1, 2 : set_q passes through a two-flop synchroniser
//   edge 3    : the FSM sees the flag (IDLE -> DETECT)
//   edge 4    : the counter steps +1 (up = 1, laser on) or -1 (up = 0, laser
//               off) and the reset flop clears the flag (DETECT -> IDLE)
// busy is high from the pulse edge until that fourth edge; a pulse arriving
// while busy is lost, which is why a channel holds several flancters.
//
// clear is the per-period sample strobe: on that edge the count restarts from
// the step taken in the same cycle (0 or +/-1), so no photon falls between two
// periods. count is the signed total since the last clear.
//
// Follows the paper: Flancter pair, four clock cycles per pulse, busy and count
// outputs, up/down by laser state. This design's own: the exact use of the four
// cycles, the synchroniser, direction taken on edge 4, counter width, reset.
module flancter #(
  parameter int unsigned CNT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pulse,   // set-side clock, from the demux
  input  logic                    up,      // 1: count up, 0: count down
  input  logic                    clear,   // sample strobe
  output logic                    busy,
  output logic signed [CNT_W-1:0] count
);

  typedef enum logic {S_IDLE = 1'b0, S_DETECT = 1'b1} fl_state_t;

  logic      set_q, rst_q;
  logic      sync1, sync2;
  fl_state_t state;
  logic      step;

  // Set side: clocked by the photon pulse.
  always_ff @(posedge pulse or negedge rst_n)
    if (!rst_n) set_q <= 1'b0;
    else        set_q <= ~rst_q;

  // Two-flop synchroniser of set_q into the clock domain.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sync1 <= 1'b0;
      sync2 <= 1'b0;
    end else begin
      sync1 <= set_q;
      sync2 <= sync1;
    end

  assign step = (state == S_DETECT);

  // Clock side: FSM, reset flop and counter.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE;
      rst_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:   if (sync2 != rst_q) state <= S_DETECT;
        S_DETECT: begin
          rst_q <= sync2;  // acknowledge: flag = set_q ^ rst_q drops
          state <= S_IDLE;
        end
        default:  state <= S_IDLE;
      endcase
    end

  logic signed [CNT_W-1:0] delta;
  assign delta = step ? (up ? CNT_W'(1) : -CNT_W'(1)) : '0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     count <= '0;
    else if (clear) count <= delta;
    else            count <= count + delta;

  assign busy = (set_q ^ rst_q) | (state != S_IDLE);

endmodule
