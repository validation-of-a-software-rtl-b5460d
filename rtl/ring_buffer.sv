// ring_buffer: the RF frame buffer, a simple dual-port memory of 1024-bit
// words (4 MiB = 32768 words by default) written by the block generator and
// read through the AXI memory-mapped port on behalf of the RDMA engine.
//
// One write port and one read port in the same clock, read data registered
// (one clock of latency), as a block-RAM or UltraRAM array infers. Reading a
// word in the clock it is written returns the old content. The circular
// addressing lives in the block generator; this is the storage only.
//
// Following the paper: a simple dual-port memory of 4 MiB with 1024-bit words.
// This design's choices: one clock of read latency, read-before-write.
module ring_buffer
  import ltl_pkg::*;
#(
  parameter int unsigned W     = AXIS_W,
  parameter int unsigned DEPTH = RING_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
