// sample_fifo: first-in first-out store of the demodulated samples.
//
// DEPTH words of WIDTH bits in one array memory, with write and read
// pointers and a fill level, all on the single 50 MHz clock. One word per
// modulation period is written; the host reads them out through the local
// bus. A read (re, when not empty) returns the oldest word on rdata in the
// next cycle. A write to a full FIFO and a read from an empty one are
// ignored. flush empties the FIFO in one cycle and wins over we and re.
// Depth 32k and 32-bit words as in the paper, which uses the FPGA vendor's
// FIFO; this single-clock FIFO with registered read is this design's own.
module sample_fifo #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned LW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             we,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [LW-1:0]    level
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign full  = (level == LW'(DEPTH));
  assign empty = (level == '0);
  assign do_wr = we && !full && !flush;
  assign do_rd = re && !empty && !flush;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk)
    if (do_wr) mem[wptr] <= wdata;

  always_ff @(posedge clk)
    if (do_rd) rdata <= mem[rptr];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else if (flush) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (do_wr) wptr <= inc(wptr);
      if (do_rd) rptr <= inc(rptr);
      level <= level + LW'(do_wr) - LW'(do_rd);
    end

  // A full FIFO never reports a level above its depth.
  a_level: assert property (@(posedge clk) disable iff (!rst_n) level <= LW'(DEPTH));

endmodule
