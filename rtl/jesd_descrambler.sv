// jesd_descrambler: undoes JESD204B character replacement and the optional
// 1 + x^14 + x^15 scrambling of one lane's user data.
//
// Character replacement: the transmitter may send the last octet of a frame
// as /F/ (K28.7), or of a multiframe as /A/ (K28.3). With scrambling on, such
// a control character stands for the data octet of the same code (0xFC or
// 0x7C); with scrambling off it repeats the last octet of the previous frame.
// Any other control character in the data phase is counted as an error.
// Descrambling is self-synchronising: each output bit is the received bit
// XOR the received bits 14 and 15 positions earlier, in serial order (octet 0
// first, most significant bit first). The history starts at zero with the
// first data word, matching a transmitter whose scrambler starts at zero.
// Latency: one clock.
//
// The paper names the optional descrambling stage; the polynomial and the
// character replacement rules follow the JESD204B standard. Clearing the
// history at the first data word is this design's choice.
module jesd_descrambler
  import ltl_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  lane_word_t  in,
  input  logic        in_valid,    // data-phase word
  input  logic        first,       // first data word: clear history
  input  logic [5:0]  mf_word,     // word index within multiframe
  input  logic        scr_en,
  output logic [31:0] out,
  output logic        out_valid,
  output logic        out_mf_start,
  output logic        char_err     // unexpected control character (sticky)
);

  logic [14:0] hist_q;       // last 15 received bits, hist_q[14] most recent
  logic [7:0]  last_oct_q;   // last octet of the previous frame (restored)

  logic        frame_end;
  logic [31:0] restored;
  logic        bad_k;
  assign frame_end = (mf_word[1:0] == 2'(WORDS_PER_FRAME - 1));

  always_comb begin
    restored = in.data;
    bad_k    = 1'b0;
    for (int i = 0; i < 4; i++) begin
      if (in.charisk[i]) begin
        if (i == 3 && frame_end &&
            (in.data[31:24] == K_F || in.data[31:24] == K_A)) begin
          if (!scr_en) restored[31:24] = last_oct_q;
        end else begin
          bad_k = 1'b1;
        end
      end
    end
  end

  // serial bit order: time t = 8*octet + (7 - bit)
  logic [46:0] ext;        // ext[0..14] history, ext[15+t] current bits
  logic [31:0] descr;
  logic [14:0] hist_d;
  always_comb begin
    ext[14:0] = first ? 15'd0 : hist_q;
    for (int o = 0; o < 4; o++)
      for (int b = 0; b < 8; b++)
        ext[15 + 8*o + (7 - b)] = restored[8*o + b];
    for (int o = 0; o < 4; o++)
      for (int b = 0; b < 8; b++) begin
        automatic int t = 8*o + (7 - b);
        descr[8*o + b] = ext[15 + t] ^ ext[t + 1] ^ ext[t];
      end
    hist_d = ext[46:32];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hist_q       <= '0;
      last_oct_q   <= '0;
      out          <= '0;
      out_valid    <= 1'b0;
      out_mf_start <= 1'b0;
      char_err     <= 1'b0;
    end else begin
      out_valid    <= in_valid;
      out_mf_start <= in_valid && mf_word == 6'd0;
      if (in_valid) begin
        hist_q <= hist_d;
        out    <= scr_en ? descr : restored;
        if (frame_end) last_oct_q <= restored[31:24];
        if (bad_k) char_err <= 1'b1;
      end
    end
  end

endmodule
