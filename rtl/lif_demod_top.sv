// lif_demod_top: photon-counting lock-in for laser induced fluorescence.
//
// The laser is switched on and off at 1 MHz (or 100 kHz). Photons seen while
// it is on are LIF plus background, photons seen while it is off are
// background only. Each of the 32 channels counts up during the on half and
// down during the off half, so at the end of every modulation period its
// count is the background-subtracted LIF count of that period.
//
//   pmt_pulses[31:0] -> updown_counter_array -> word_packer -> sample_fifo
//                              ^  up, sample          |            |
//   updown_state_gen ----------+                   acq_fsm    local_bus_if
//        '-> laser_ttl (phase-shifted)                            <-> lb_*
//
// On each sample strobe (rising edge of the up/down state) the channel counts
// are summed per PMT (channels 1-16, 17-32), packed into one 32-bit word and,
// while acquiring, written to the 32k-word FIFO; the counters restart in the
// same cycle. The host sets mode, frequency and laser phase, and reads status
// and FIFO words, over the local bus (see local_bus_if).
//
// Pulses on pmt_pulses are asynchronous to clk and may be a few ns wide; they
// reach the counts four clock cycles later. clk is 50 MHz.
// The structure follows the paper's FPGA block diagram; the bus, the register
// map and the number of flancters per channel are this design's choices.
module lif_demod_top
  import lif_pkg::*;
#(
  parameter int unsigned CHANNELS    = 32,
  parameter int unsigned N_FLANCTERS = 8,
  parameter int unsigned FIFO_DEPTH  = 32768,
  localparam int unsigned CNT_W = 16,
  localparam int unsigned SUM_W = 16,
  localparam int unsigned LW    = $clog2(FIFO_DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CHANNELS-1:0] pmt_pulses,
  output logic                laser_ttl,
  input  logic [3:0]          lb_addr,
  input  logic                lb_wr,
  input  logic                lb_rd,
  input  logic [31:0]         lb_wdata,
  output logic [31:0]         lb_rdata,
  output logic                lb_ack
);

  logic                                  up, sample, freq_sel, overrun_raw, overrun;
  logic [PHASE_W-1:0]                    phase;
  logic signed [CHANNELS-1:0][SUM_W-1:0] counts;
  logic [31:0]                           word, fifo_rdata;
  logic                                  fifo_we, fifo_re, fifo_flush, fifo_full, fifo_empty;
  logic [LW-1:0]                         fifo_level;
  acq_state_t                            state, cmd;
  logic                                  cmd_valid;

  updown_state_gen u_state (
    .clk, .rst_n, .freq_sel, .phase, .up, .sample, .laser_ttl
  );

  updown_counter_array #(
    .CHANNELS(CHANNELS), .N_FLANCTERS(N_FLANCTERS), .CNT_W(CNT_W), .SUM_W(SUM_W)
  ) u_counters (
    .clk, .rst_n, .pulses(pmt_pulses), .up, .clear(sample),
    .counts, .overrun(overrun_raw)
  );

  word_packer #(.CHANNELS(CHANNELS), .SUM_W(SUM_W), .HALF_W(16)) u_pack (
    .counts, .word
  );

  acq_fsm u_fsm (
    .clk, .rst_n, .cmd, .cmd_valid, .sample, .fifo_full,
    .overrun_in(overrun_raw), .state, .fifo_we, .fifo_flush, .overrun
  );

  sample_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(32)) u_fifo (
    .clk, .rst_n, .flush(fifo_flush), .we(fifo_we), .wdata(word),
    .re(fifo_re), .rdata(fifo_rdata), .full(fifo_full), .empty(fifo_empty),
    .level(fifo_level)
  );

  local_bus_if #(.LW(LW)) u_lb (
    .clk, .rst_n, .lb_addr, .lb_wr, .lb_rd, .lb_wdata, .lb_rdata, .lb_ack,
    .cmd, .cmd_valid, .freq_sel, .phase,
    .state, .overrun, .fifo_full, .fifo_empty, .fifo_level,
    .fifo_re, .fifo_rdata
  );

endmodule
