// jesd_cgs_fsm: JESD204B code group synchronisation for one lane.
//
// The receiver holds SYNC~ low while the transmitter sends /K/ (K28.5)
// characters. This FSM counts consecutive /K/ octets; four in a row move it
// from CS_INIT to CS_DATA, which reports the lane as synchronised. In CS_DATA
// (and CS_CHECK) octets flagged by the PHY as decoding errors are counted: a
// first error enters CS_CHECK, three errors there drop the lane back to
// CS_INIT, four clean words return it to CS_DATA. The three states and the
// 4-/K/ rule follow the JESD204B standard; the counts in CS_CHECK are
// simplified to whole 32-bit words. Four octets arrive per clock (octet 0
// first); timing: cgs_done is registered, one clock after the word that
// completes the fourth /K/.
//
// The paper names the code group synchronisation stage; the state machine
// (4 /K/ to lock, 3 errors to lose sync) follows the JESD204B standard and is
// this design's reading of it.
module jesd_cgs_fsm
  import ltl_pkg::*;
(
  input  logic       clk,
  input  logic       rst,        // synchronous, active high
  input  lane_word_t in,         // octet-aligned PHY word
  input  logic [3:0] dec_err,    // per-octet 8b/10b decoding error from the PHY
  output logic       cgs_done    // lane synchronised (CS_DATA / CS_CHECK)
);

  typedef enum logic [1:0] {CS_INIT, CS_CHECK, CS_DATA} cs_state_e;

  cs_state_e  state_q;
  logic [2:0] kcnt_q, kcnt_d;    // consecutive /K/ octets, saturating at 4
  logic [1:0] ecnt_q;            // errors seen in CS_CHECK
  logic [1:0] okcnt_q;           // clean words seen in CS_CHECK

  always_comb begin
    kcnt_d = kcnt_q;
    for (int i = 0; i < 4; i++) begin
      if (in.charisk[i] && in.data[8*i +: 8] == K_K && !dec_err[i])
        kcnt_d = (kcnt_d == 3'd4) ? 3'd4 : kcnt_d + 3'd1;
      else
        kcnt_d = 3'd0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= CS_INIT;
      kcnt_q  <= '0;
      ecnt_q  <= '0;
      okcnt_q <= '0;
    end else begin
      unique case (state_q)
        CS_INIT: begin
          kcnt_q <= kcnt_d;
          if (kcnt_d == 3'd4) state_q <= CS_DATA;
        end
        CS_DATA: begin
          if (|dec_err) begin
            state_q <= CS_CHECK;
            ecnt_q  <= 2'd1;
            okcnt_q <= '0;
          end
        end
        CS_CHECK: begin
          if (|dec_err) begin
            okcnt_q <= '0;
            if (ecnt_q == 2'd2) begin
              state_q <= CS_INIT;
              kcnt_q  <= '0;
            end else ecnt_q <= ecnt_q + 2'd1;
          end else if (okcnt_q == 2'd3) begin
            state_q <= CS_DATA;
          end else okcnt_q <= okcnt_q + 2'd1;
        end
        default: state_q <= CS_INIT;
      endcase
    end
  end

  assign cgs_done = (state_q != CS_INIT);

endmodule
