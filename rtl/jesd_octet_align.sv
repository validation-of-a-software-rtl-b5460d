// jesd_octet_align: aligns the octet stream of one lane to 32-bit words.
//
// The PHY delivers four octets per clock, but the octet that starts the
// initial lane alignment sequence (ILAS, first octet /R/ = K28.0) may land in
// any of the four byte positions. After code group synchronisation the first
// octet that is not /K/ marks the start of the first multiframe; its byte
// position is locked as the rotation, and from then on each output word is
// built from the tail of the previous and the head of the current input
// word, so that octet 0 of every output word is the first octet of a
// 4-octet group counted from the multiframe start. Loss of synchronisation
// unlocks it. Latency: one clock. `ilas_start` marks the output word whose
// octet 0 is the /R/ character.
//
// The paper names the octet alignment stage only; aligning on the first
// octet after code group synchronisation is this design's choice.
module jesd_octet_align
  import ltl_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       cgs_done,   // from jesd_cgs_fsm
  input  lane_word_t in,
  output lane_word_t out,
  output logic       out_valid,  // aligned words follow
  output logic       ilas_start  // this word starts the ILAS
);

  lane_word_t prev_q;
  logic [1:0] ofs_q;
  logic       locked_q;
  logic       first_q;

  // position of the first non-/K/ octet in the current word
  logic       found;
  logic [1:0] found_pos;
  always_comb begin
    found     = 1'b0;
    found_pos = 2'd0;
    for (int i = 3; i >= 0; i--) begin
      if (!(in.charisk[i] && in.data[8*i +: 8] == K_K)) begin
        found     = 1'b1;
        found_pos = 2'(i);
      end
    end
  end

  // rotation: {in, prev} shifted right by ofs octets
  logic [63:0] cat_d;
  logic [7:0]  cat_k;
  always_comb begin
    cat_d = {in.data, prev_q.data} >> (8 * ofs_q);
    cat_k = {in.charisk, prev_q.charisk} >> ofs_q;
  end

  always_ff @(posedge clk) begin
    if (rst || !cgs_done) begin
      prev_q     <= '0;
      ofs_q      <= '0;
      locked_q   <= 1'b0;
      first_q    <= 1'b0;
      out        <= '0;
      out_valid  <= 1'b0;
      ilas_start <= 1'b0;
    end else begin
      prev_q <= in;
      if (!locked_q && found) begin
        locked_q <= 1'b1;
        ofs_q    <= found_pos;
        first_q  <= 1'b1;
      end else begin
        first_q  <= 1'b0;
      end
      // output is produced one word later, once the next word has arrived
      out.data    <= cat_d[31:0];
      out.charisk <= cat_k[3:0];
      out_valid   <= locked_q;
      ilas_start  <= first_q;
    end
  end

endmodule
