// filler: pads the channels a smaller system does not digitise with dummy
// samples, so that the datapath behind it always carries the 1024-bit
// (64 samples per clock) stream of the 256-channel system.
//
// The IN_W live bits stay in the low part of each word; every 16-bit dummy
// sample above them is {8-bit position of the sample in the word, 8-bit count
// of frames (four-word groups) seen so far}, so the padding is recognisable
// and changes over time. The dummy pattern is this design's choice; the
// paper only says that unused channels are padded with dummy data.
// Combinational on the data, one register stage; valid and flags are delayed
// with it.
module filler
  import ltl_pkg::*;
#(
  parameter int unsigned IN_W = AFE_W          // 64 bits = one 16-channel AFE
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [IN_W-1:0]   s_tdata,
  input  logic              s_tvalid,
  input  logic              s_sset_start,
  output logic [AXIS_W-1:0] m_tdata,
  output logic              m_tvalid,
  output logic              m_sset_start
);
  localparam int unsigned PAD_SAMPLES = (AXIS_W - IN_W) / SAMPLE_W;
  localparam int unsigned FIRST = IN_W / SAMPLE_W;

  logic [7:0] fcnt_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      fcnt_q       <= '0;
      m_tvalid     <= 1'b0;
      m_sset_start <= 1'b0;
      m_tdata      <= '0;
    end else begin
      m_tvalid     <= s_tvalid;
      m_sset_start <= s_tvalid && s_sset_start;
      if (s_tvalid) begin
        logic [7:0] f;
        f = s_sset_start ? fcnt_q + 8'd1 : fcnt_q;
        fcnt_q <= f;
        m_tdata[IN_W-1:0] <= s_tdata;
        for (int i = 0; i < PAD_SAMPLES; i++)
          m_tdata[IN_W + SAMPLE_W*i +: SAMPLE_W] <= {8'(FIRST + i), f};
      end
    end
  end

endmodule
