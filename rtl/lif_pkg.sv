// lif_pkg: constants and types shared by the LIF photon-counting demodulator.
//
// The design runs from one 50 MHz clock. The laser is modulated at 1 MHz
// (50 clock cycles per period) or 100 kHz (500 cycles). The clock rate and the
// two modulation rates follow the paper; the register map, the state encoding
// and the bus widths below are this design's own choices.
package lif_pkg;

  // Laser modulation periods in 50 MHz clock cycles.
  localparam int unsigned PERIOD_FAST = 50;   // 1 MHz
  localparam int unsigned PERIOD_SLOW = 500;  // 100 kHz
  localparam int unsigned PHASE_W     = 9;    // holds 0 .. PERIOD_SLOW-1

  // Acquisition controller states.
  typedef enum logic [1:0] {
    ACQ_IDLE    = 2'd0,
    ACQ_ACQUIRE = 2'd1,
    ACQ_READOUT = 2'd2
  } acq_state_t;

  // Local bus register addresses (word addresses).
  localparam logic [3:0] REG_CTRL   = 4'h0;  // R/W control
  localparam logic [3:0] REG_STATUS = 4'h1;  // R   status
  localparam logic [3:0] REG_FIFO   = 4'h2;  // R   FIFO data, read pops
  localparam logic [3:0] REG_ID     = 4'h3;  // R   constant identifier

  localparam logic [31:0] DESIGN_ID = 32'h11F0_0032;

  // Control register layout (bits 31:0):
  //   [1:0]   requested mode (acq_state_t)
  //   [2]     freq_sel, 0 = 1 MHz, 1 = 100 kHz
  //   [24:16] phase offset of the laser output, clock cycles
  typedef struct packed {
    logic [6:0]         rsvd2;
    logic [PHASE_W-1:0] phase;
    logic [12:0]        rsvd1;
    logic               freq_sel;
    acq_state_t         mode;
  } ctrl_reg_t;

  // Status register layout:
  //   [1:0]  current state, [2] FIFO full, [3] FIFO empty,
  //   [4] a pulse found every flancter of its channel busy (sticky),
  //   [31:16] FIFO level, saturated to 16 bits
  typedef struct packed {
    logic [15:0] level;
    logic [10:0] rsvd;
    logic        overrun;
    logic        empty;
    logic        full;
    acq_state_t  state;
  } status_reg_t;

endpackage
