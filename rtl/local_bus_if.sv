// local_bus_if: register slave between the FPGA logic and the board's bus
// bridge to the VME backplane.
//
// A simple synchronous strobe bus: the master raises lb_wr or lb_rd for one
// cycle with lb_addr (and lb_wdata); lb_ack is high one cycle later, with
// lb_rdata valid for a read. Registers (lif_pkg):
//   REG_CTRL   R/W  mode[1:0], freq_sel[2], phase[24:16]; a write also
//                   issues the mode as a command to the acquisition FSM
//   REG_STATUS R    state, FIFO full/empty, overrun, FIFO level
//   REG_FIFO   R    oldest FIFO word; the read pops it. Only in READOUT
//                   with a non-empty FIFO, otherwise 0 and nothing popped
//   REG_ID     R    constant DESIGN_ID
// The paper names this interface and says the FIFO is read through it and
// the FSM is set by register writes; the bus protocol and register map here
// are this design's own, as the board's bus is not described.
module local_bus_if
  import lif_pkg::*;
#(
  parameter int unsigned LW = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // bus side
  input  logic [3:0]         lb_addr,
  input  logic               lb_wr,
  input  logic               lb_rd,
  input  logic [31:0]        lb_wdata,
  output logic [31:0]        lb_rdata,
  output logic               lb_ack,
  // control outputs
  output acq_state_t         cmd,
  output logic               cmd_valid,
  output logic               freq_sel,
  output logic [PHASE_W-1:0] phase,
  // status inputs
  input  acq_state_t         state,
  input  logic               overrun,
  input  logic               fifo_full,
  input  logic               fifo_empty,
  input  logic [LW-1:0]      fifo_level,
  // FIFO read port
  output logic               fifo_re,
  input  logic [31:0]        fifo_rdata
);

  ctrl_reg_t   ctrl;
  status_reg_t status;
  logic [3:0]  rd_addr;
  logic        rd_pend, fifo_popped;

  assign cmd      = ctrl.mode;
  assign freq_sel = ctrl.freq_sel;
  assign phase    = ctrl.phase;
  assign fifo_re  = lb_rd && lb_addr == REG_FIFO && state == ACQ_READOUT && !fifo_empty;

  always_comb begin
    status         = '0;
    status.state   = state;
    status.full    = fifo_full;
    status.empty   = fifo_empty;
    status.overrun = overrun;
    status.level   = (LW > 16 && fifo_level > LW'(16'hFFFF)) ? 16'hFFFF : 16'(fifo_level);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ctrl        <= '0;
      cmd_valid   <= 1'b0;
      rd_pend     <= 1'b0;
      rd_addr     <= '0;
      fifo_popped <= 1'b0;
      lb_ack      <= 1'b0;
    end else begin
      cmd_valid   <= 1'b0;
      lb_ack      <= lb_wr || lb_rd;
      rd_pend     <= lb_rd;
      rd_addr     <= lb_addr;
      fifo_popped <= fifo_re;
      if (lb_wr && lb_addr == REG_CTRL) begin
        ctrl      <= ctrl_reg_t'(lb_wdata);
        cmd_valid <= 1'b1;
      end
    end

  always_comb begin
    lb_rdata = '0;
    if (rd_pend)
      unique case (rd_addr)
        REG_CTRL:   lb_rdata = ctrl;
        REG_STATUS: lb_rdata = status;
        REG_FIFO:   lb_rdata = fifo_popped ? fifo_rdata : '0;
        REG_ID:     lb_rdata = DESIGN_ID;
        default:    lb_rdata = '0;
      endcase
  end

  // The master issues one access at a time.
  a_one_access: assert property (@(posedge clk) disable iff (!rst_n) !(lb_wr && lb_rd));

endmodule
