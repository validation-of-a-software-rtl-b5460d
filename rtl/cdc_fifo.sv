// cdc_fifo: asynchronous FIFO carrying one AFE's JESD204B output stream from
// the device clock into the single PL system clock.
//
// Classic dual-clock FIFO: binary pointers for addressing, Gray-coded copies
// passed through two-flop synchronisers to the other side, full and empty
// computed from the synchronised Gray pointers. The write side has no
// back-pressure (the link cannot be stopped), so a write into a full FIFO is
// dropped and flagged; the system clock must be at least as fast as the
// device clock on average. The read side is first-word fall-through: rd_data
// is valid whenever rd_empty is low. Depth is this design's choice.
module cdc_fifo #(
  parameter int unsigned W     = 65,
  parameter int unsigned DEPTH = 16    // power of two
) (
  input  logic         wr_clk,
  input  logic         wr_rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         wr_overflow,    // sticky, write clock domain
  input  logic         rd_clk,
  input  logic         rd_rst,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         rd_empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic         full;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign full = (bin2gray(wbin_q) == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin_q[AW-1:0]] <= wr_data;
  end
  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin_q <= '0; wgray_q <= '0; rgray_w1 <= '0; rgray_w2 <= '0; wr_overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray_q;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin_q  <= wbin_q + 1'b1;
        wgray_q <= bin2gray(wbin_q + 1'b1);
      end
      if (wr_en && full) wr_overflow <= 1'b1;
    end
  end

  // read side
  assign rd_empty = (rgray_q == wgray_r2);
  assign rd_data  = mem[rbin_q[AW-1:0]];
  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin_q <= '0; rgray_q <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray_q;
      wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin_q  <= rbin_q + 1'b1;
        rgray_q <= bin2gray(rbin_q + 1'b1);
      end
    end
  end

endmodule
