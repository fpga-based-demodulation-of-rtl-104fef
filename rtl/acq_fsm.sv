// acq_fsm: the acquisition controller.
//
// Three states: IDLE, ACQUIRE (samples go into the FIFO) and READOUT (the
// host empties the FIFO over the local bus). The host moves the FSM by
// writing the mode field of the control register (cmd with cmd_valid).
// Entering ACQUIRE flushes the FIFO and clears the overrun flag; the first
// sample strobe after that only starts a clean period, and each later strobe
// writes one word. When the FIFO is full, ACQUIRE returns to IDLE by itself,
// so one run is exactly DEPTH consecutive modulation periods.
//
// overrun_in (a pulse found every flancter of its channel busy) comes from
// the pulse domain; it is synchronised and held in the sticky overrun output.
// The three states and their control from host register writes follow the
// paper; the transitions, the flush and the overrun flag are this design's.
module acq_fsm
  import lif_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  acq_state_t cmd,
  input  logic       cmd_valid,
  input  logic       sample,
  input  logic       fifo_full,
  input  logic       overrun_in,
  output acq_state_t state,
  output logic       fifo_we,
  output logic       fifo_flush,
  output logic       overrun
);

  logic armed;
  logic ov_s1, ov_s2;
  logic start;

  assign start   = cmd_valid && (cmd == ACQ_ACQUIRE);
  assign fifo_we = (state == ACQ_ACQUIRE) && armed && sample && !fifo_full;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state      <= ACQ_IDLE;
      armed      <= 1'b0;
      fifo_flush <= 1'b0;
    end else begin
      fifo_flush <= start;
      if (cmd_valid) begin
        state <= (cmd == ACQ_ACQUIRE || cmd == ACQ_READOUT) ? cmd : ACQ_IDLE;
        armed <= 1'b0;
      end else if (state == ACQ_ACQUIRE) begin
        if (fifo_full)   state <= ACQ_IDLE;
        else if (sample) armed <= 1'b1;
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ov_s1   <= 1'b0;
      ov_s2   <= 1'b0;
      overrun <= 1'b0;
    end else begin
      ov_s1 <= overrun_in;
      ov_s2 <= ov_s1;
      if (start)      overrun <= 1'b0;
      else if (ov_s2) overrun <= 1'b1;
    end

  // The FIFO is only written while acquiring.
  a_we_acq: assert property (@(posedge clk) disable iff (!rst_n) fifo_we |-> state == ACQ_ACQUIRE);

endmodule
