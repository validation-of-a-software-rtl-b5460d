// jesd_ilas_monitor: follows the initial lane alignment sequence of one lane
// and keeps the multiframe position afterwards.
//
// The ILAS is four multiframes. Each starts with /R/ (K28.0) and ends with
// /A/ (K28.3); the second carries /Q/ (K28.4) followed by the 14 link
// configuration octets. This block counts words from the ILAS start, checks
// the /R/, /A/ and /Q/ positions, captures the configuration and compares the
// lane ID (LID), L, F, K and M with the values the receiver is built for and
// the checksum (FCHK, taken here as the 8-bit sum of configuration octets
// 0..12). It reports the scrambling bit (SCR) it received. After the fourth
// multiframe it declares the data phase and keeps counting words modulo one
// multiframe. The monitor is combinational on the data path: its flags belong
// to the word currently at its input.
//
// The paper says the receiver validates the initial lane assignment; which
// fields are checked, and the error reporting, are this design's choices
// based on the JESD204B ILAS format.
module jesd_ilas_monitor
  import ltl_pkg::*;
#(
  parameter int unsigned EXP_LID = 0    // lane ID expected in the ILAS
) (
  input  logic       clk,
  input  logic       rst,
  input  lane_word_t in,
  input  logic       in_valid,     // aligned words (from jesd_octet_align)
  input  logic       ilas_start,   // this word is ILAS word 0
  output logic       data_valid,   // this word is user data
  output logic [5:0] mf_word,      // word index within the multiframe
  output logic       data_first,   // first data word after the ILAS
  output logic       scr_en,       // SCR bit received in the ILAS
  output logic       ilas_done,    // ILAS finished (sticky until resync)
  output logic       ilas_err      // sequence or configuration mismatch (sticky)
);

  localparam int unsigned ILAS_WORDS = ILAS_MF * WORDS_PER_MF;  // 256

  typedef enum logic [1:0] {PH_IDLE, PH_ILAS, PH_DATA} phase_e;

  phase_e     phase_q;
  logic [7:0] idx_q;
  logic [7:0] cur_idx;
  logic [7:0] cfg_q [14];
  logic       scr_q, err_q;
  logic       ilas_done_first_q;  // set after the first data word

  assign cur_idx = ilas_start ? 8'd0 : idx_q;

  logic in_ilas;
  assign in_ilas    = in_valid && (ilas_start || phase_q == PH_ILAS);
  assign data_valid = in_valid && phase_q == PH_DATA;
  assign mf_word    = cur_idx[5:0];
  assign data_first = data_valid && idx_q == 8'd0 && !ilas_done_first_q;
  assign scr_en     = scr_q;
  assign ilas_done  = (phase_q == PH_DATA);
  assign ilas_err   = err_q;

  // octet-level expectations for the current ILAS word
  logic       word_err;
  logic [7:0] fchk;
  always_comb begin
    word_err = 1'b0;
    if (cur_idx[5:0] == 6'd0 && !(in.charisk[0] && in.data[7:0] == K_R)) word_err = 1'b1;
    if (cur_idx[5:0] == 6'(WORDS_PER_MF - 1) && !(in.charisk[3] && in.data[31:24] == K_A)) word_err = 1'b1;
    if (cur_idx == 8'(WORDS_PER_MF) && !(in.charisk[1] && in.data[15:8] == K_Q)) word_err = 1'b1;
    fchk = '0;
    for (int j = 0; j < 13; j++) fchk = fchk + cfg_q[j];
  end

  // configuration octets sit in multiframe 1, octets 2..15 = words 64..67
  always_ff @(posedge clk) begin
    if (rst || !in_valid) begin
      phase_q <= PH_IDLE;
      idx_q   <= '0;
      scr_q   <= 1'b0;
      err_q   <= 1'b0;
      ilas_done_first_q <= 1'b0;
      for (int j = 0; j < 14; j++) cfg_q[j] <= '0;
    end else begin
      if (in_ilas) begin
        phase_q <= PH_ILAS;
        idx_q   <= cur_idx + 8'd1;
        if (word_err) err_q <= 1'b1;
        if (cur_idx >= 8'(WORDS_PER_MF) && cur_idx < 8'(WORDS_PER_MF + 4)) begin
          for (int i = 0; i < 4; i++) begin
            automatic int o = 4 * int'({24'd0, 8'(cur_idx - 8'(WORDS_PER_MF))}) + i - 2;
            if (o >= 0 && o < 14) cfg_q[o] <= in.data[8*i +: 8];
          end
        end
        if (cur_idx == 8'(ILAS_WORDS - 1)) begin
          phase_q <= PH_DATA;
          idx_q   <= '0;
          scr_q   <= cfg_q[3][7];
          if (cfg_q[2][4:0] != 5'(EXP_LID) || cfg_q[3][4:0] != 5'(JESD_L - 1) ||
              cfg_q[4] != 8'(JESD_F - 1) || cfg_q[5][4:0] != 5'(JESD_K - 1) ||
              cfg_q[6] != 8'(JESD_M - 1) || cfg_q[13] != fchk)
            err_q <= 1'b1;
        end
      end else if (phase_q == PH_DATA) begin
        idx_q <= {2'b00, idx_q[5:0] + 6'd1};
        ilas_done_first_q <= 1'b1;
      end
    end
  end

endmodule
