// block_gen: the block generator. Writes framed data into the circular ring
// buffer in contiguous blocks and reports each filled block.
//
// Words are written at consecutive addresses of the ring buffer (wrapping at
// its end). The buffer is divided into blocks of 2^block_log2 words
// (2^11 words x 128 bytes = 256 KB by default); each time a block is full,
// or a frame ends inside a block, blk_irq pulses with the block's start
// address and word count, which is what the processor needs to post one
// RDMA WRITE for it. A frame that ends inside a block leaves the rest of
// that block unused, so every frame begins on a block boundary.
// Occupancy: a block counts as occupied from its first word until the
// processor signals (release) that the RDMA transfer of a block finished.
// Opening a block while all blocks are occupied sets the sticky overflow
// flag: the "leaky bucket" of write and read rates has run over and data
// not yet sent is overwritten.
// Following the paper: contiguous blocks in a circular buffer, one interrupt
// per filled block, 256 KB blocks. This design's choices: block sizes as
// powers of two, closing a partial block at frame end, occupancy tracking.
module block_gen
  import ltl_pkg::*;
#(
  parameter int unsigned ADDR_W = $clog2(RING_DEPTH)   // 15 for 4 MiB
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [AXIS_W-1:0] s_tdata,
  input  logic              s_tvalid,
  input  logic              s_tlast,
  input  logic [3:0]        block_log2,    // words per block = 2**block_log2
  input  logic              release_blk,   // one block has been read out
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_waddr,
  output logic [AXIS_W-1:0] mem_wdata,
  output logic              blk_irq,
  output logic [ADDR_W-1:0] blk_addr,      // first word of the block
  output logic [ADDR_W:0]   blk_words,     // words written into it
  output logic [15:0]       blk_cnt,
  output logic [ADDR_W:0]   occupied,      // blocks not yet released
  output logic              overflow
);

  logic [ADDR_W-1:0] wp_q, bstart_q;
  logic [ADDR_W:0]   fill_q, bwords, nblocks;

  assign bwords  = (ADDR_W+1)'(1) << block_log2;
  assign nblocks = (ADDR_W+1)'(1) << (ADDR_W - int'(block_log2));

  always_ff @(posedge clk) begin
    if (rst) begin
      wp_q      <= '0;
      bstart_q  <= '0;
      fill_q    <= '0;
      occupied  <= '0;
      overflow  <= 1'b0;
      mem_we    <= 1'b0;
      mem_waddr <= '0;
      mem_wdata <= '0;
      blk_irq   <= 1'b0;
      blk_addr  <= '0;
      blk_words <= '0;
      blk_cnt   <= '0;
    end else begin
      logic opening, dec, full_now;
      opening  = s_tvalid && fill_q == 0;
      mem_we    <= s_tvalid;
      mem_waddr <= wp_q;
      mem_wdata <= s_tdata;
      blk_irq   <= 1'b0;

      // occupancy bookkeeping
      dec      = release_blk && occupied != 0;
      full_now = (occupied == nblocks) && !dec;
      if (opening && full_now) overflow <= 1'b1;
      occupied <= occupied + (ADDR_W+1)'(opening && !full_now) - (ADDR_W+1)'(dec);

      if (s_tvalid) begin
        if (opening) bstart_q <= wp_q;
        if (fill_q + 1'b1 == bwords || s_tlast) begin
          blk_irq   <= 1'b1;
          blk_addr  <= opening ? wp_q : bstart_q;
          blk_words <= fill_q + 1'b1;
          blk_cnt   <= blk_cnt + 16'd1;
          fill_q    <= '0;
          // next block starts on a block boundary
          wp_q      <= (opening ? wp_q : bstart_q) + ADDR_W'(bwords);
        end else begin
          fill_q <= fill_q + 1'b1;
          wp_q   <= wp_q + 1'b1;
        end
      end
    end
  end

endmodule
