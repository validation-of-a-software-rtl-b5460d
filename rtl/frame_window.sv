// frame_window: cuts frames out of the continuous sample stream.
//
// After win_start (from the trigger block) the window waits for the next
// word that begins a sample set (all 256 channels, four 1024-bit words) and
// then forwards exactly frame_len sample sets, i.e. 4 * frame_len words,
// marking the first word with tsof and the last with tlast. On the first
// word it pulses frame_irq, the interrupt that tells the processor a new
// frame acquisition has started. Words outside a window are discarded. A
// win_start during a window is ignored. There is no back-pressure: the
// stream runs at the converters' rate and this stage adds one register.
// frame_len = 0 disables framing.
//
// Following the paper: a programmable number of samples per trigger and an
// interrupt at the start of each frame. This design's choices: frames start on
// a sample-set boundary, tsof/tlast marking, the 20-bit length.
module frame_window
  import ltl_pkg::*;
#(
  parameter int unsigned LEN_W = 20
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [AXIS_W-1:0] s_tdata,
  input  logic              s_tvalid,
  input  logic              s_sset_start,
  input  logic              win_start,
  input  logic [LEN_W-1:0]  frame_len,    // samples per channel
  output logic [AXIS_W-1:0] m_tdata,
  output logic              m_tvalid,
  output logic              m_tsof,
  output logic              m_tlast,
  output logic              frame_irq,
  output logic              busy,
  output logic [15:0]       frame_cnt
);

  typedef enum logic [1:0] {W_IDLE, W_ARMED, W_RUN} wstate_e;
  wstate_e           st_q;
  logic [LEN_W+1:0]  left_q;    // words still to forward after this one

  assign busy = (st_q != W_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st_q      <= W_IDLE;
      left_q    <= '0;
      m_tdata   <= '0;
      m_tvalid  <= 1'b0;
      m_tsof    <= 1'b0;
      m_tlast   <= 1'b0;
      frame_irq <= 1'b0;
      frame_cnt <= '0;
    end else begin
      m_tvalid  <= 1'b0;
      m_tsof    <= 1'b0;
      m_tlast   <= 1'b0;
      frame_irq <= 1'b0;
      m_tdata   <= s_tdata;
      unique case (st_q)
        W_IDLE: if (win_start && frame_len != 0) st_q <= W_ARMED;
        W_ARMED: if (s_tvalid && s_sset_start) begin
          st_q      <= W_RUN;
          m_tvalid  <= 1'b1;
          m_tsof    <= 1'b1;
          frame_irq <= 1'b1;
          frame_cnt <= frame_cnt + 16'd1;
          left_q    <= {frame_len, 2'b00} - 1'b1;
        end
        W_RUN: if (s_tvalid) begin
          m_tvalid <= 1'b1;
          left_q   <= left_q - 1'b1;
          if (left_q == 1) begin
            m_tlast <= 1'b1;
            st_q    <= W_IDLE;
          end
        end
        default: st_q <= W_IDLE;
      endcase
    end
  end

endmodule
