// stream_coalescer: aligns the streams of several AFEs on their multiframe
// start and merges them into one wide stream in the system clock domain.
//
// Every AFE stream arrives through its own clock-crossing FIFO, each word
// tagged with the multiframe-start flag of its JESD204B link. Because SYSREF
// makes all AFEs start their multiframes on the same ADC sample, the words
// tagged at the heads of all FIFOs belong to the same sampling instant.
// While seeking, words ahead of the first multiframe start are dropped and a
// FIFO that reached its tag waits for the others; once all heads carry the
// tag, all FIFOs are popped together, one word each per clock, and their
// words are concatenated (AFE 0 in the low bits). A lost alignment (a tag
// arriving on some but not all streams) returns to seeking and is counted.
// Output flags: sset_start marks the first of the four words of a frame
// (one sample of every channel of a 16-channel group), mf_start the first
// word of a multiframe. One clock of latency (registered output).
//
// Following the paper: streams are delayed to their multiframe starts and
// coalesced into one wide stream. The seek/realign algorithm and the
// sample-set marker are this design's own.
module stream_coalescer
  import ltl_pkg::*;
#(
  parameter int unsigned N_AFE = 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [AFE_W-1:0]       s_data  [N_AFE],
  input  logic [N_AFE-1:0]       s_mf_start,
  input  logic [N_AFE-1:0]       s_empty,
  output logic [N_AFE-1:0]       s_rd_en,
  output logic [N_AFE*AFE_W-1:0] m_tdata,
  output logic                   m_tvalid,
  output logic                   m_sset_start,
  output logic                   m_mf_start,
  output logic                   aligned,
  output logic [15:0]            realign_cnt
);

  logic [1:0] wphase_q;   // word within frame
  logic all_ready, all_tag, any_tag, mismatch, pop;

  assign all_ready = !(|s_empty);
  assign all_tag   = &(s_mf_start | s_empty) && all_ready;
  assign any_tag   = |(s_mf_start & ~s_empty);
  assign mismatch  = all_ready && any_tag && !all_tag;
  assign pop       = aligned ? (all_ready && !mismatch) : (all_ready && all_tag);

  always_comb begin
    for (int a = 0; a < N_AFE; a++) begin
      if (aligned || (all_ready && all_tag))
        s_rd_en[a] = pop;
      else
        s_rd_en[a] = !s_empty[a] && !s_mf_start[a];  // drop until the tag
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      aligned     <= 1'b0;
      wphase_q    <= '0;
      realign_cnt <= '0;
      m_tvalid    <= 1'b0;
      m_tdata     <= '0;
      m_sset_start <= 1'b0;
      m_mf_start   <= 1'b0;
    end else begin
      m_tvalid <= 1'b0;
      if (aligned && mismatch) begin
        aligned     <= 1'b0;    // streams disagree: seek again
        realign_cnt <= realign_cnt + 1'b1;
      end else if (pop) begin
        aligned      <= 1'b1;
        m_tvalid     <= 1'b1;
        for (int a = 0; a < N_AFE; a++) m_tdata[a*AFE_W +: AFE_W] <= s_data[a];
        m_mf_start   <= s_mf_start[0];
        m_sset_start <= s_mf_start[0] || wphase_q == 2'd0;
        wphase_q     <= s_mf_start[0] ? 2'd1 : wphase_q + 2'd1;
      end
    end
  end

endmodule
