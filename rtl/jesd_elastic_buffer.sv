// jesd_elastic_buffer: per-lane FIFO that absorbs lane-to-lane skew.
//
// Each lane writes its data-phase words from the first word of a multiframe
// on; the owner reads all lanes with one common read enable once every lane
// holds data, so words that left the transmitters together leave the
// buffers together whatever the skew of the PCB traces or transceivers.
// A plain synchronous FIFO with registered occupancy; depth is this
// design's choice and bounds the skew it absorbs (DEPTH-1 words).
// Read data is available in the same clock as rd_en (first-word fall-through).
module jesd_elastic_buffer #(
  parameter int unsigned W     = 33,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] din,
  input  logic         rd_en,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         overflow   // sticky: write into a full buffer
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp_q, rp_q;
  logic          full;

  assign empty = (wp_q == rp_q);
  assign full  = (wp_q[AW-1:0] == rp_q[AW-1:0]) && (wp_q[AW] != rp_q[AW]);
  assign dout  = mem[rp_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp_q[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp_q     <= '0;
      rp_q     <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr_en && !full) wp_q <= wp_q + 1'b1;
      if (wr_en && full)  overflow <= 1'b1;
      if (rd_en && !empty) rp_q <= rp_q + 1'b1;
    end
  end

endmodule
