// afe_jesd_tx_model: behavioural (non-synthesizable) model of the JESD204B
// transmit side of one 16-channel AFE, as seen after the receive PHY.
//
// Two lanes (one per 8-channel bank), F=16 octets per frame, K=16 frames per
// multiframe, 16-bit samples sent MSB first. Each lane sends /K/ while SYNC~
// is low, then at the next multiframe boundary of its free-running local
// multiframe counter the four-multiframe ILAS with the link configuration,
// then user data, optionally scrambled (1 + x^14 + x^15) and with JESD204B
// character replacement. Sample value of channel ch in data frame n:
//   {AFE_ID[3:0], ch[3:0], (n >> SLOW)[7:0]}
// OCTET_OFS delays each lane's octet stream by 0..3 octets and SKEW1 delays
// lane 1 by whole words, to exercise octet alignment and the elastic buffers.
//
// Behavioural model, not synthesizable logic. The link format follows the
// JESD204B standard with the lane configuration used in this design (8
// converters, 1 lane, F = 16, K = 16); the sample pattern is this design's.
module afe_jesd_tx_model
  import ltl_pkg::*;
#(
  parameter int unsigned AFE_ID    = 0,
  parameter int unsigned LID0      = 0,
  parameter bit          SCR       = 1'b0,
  parameter int unsigned SLOW      = 0,
  parameter int unsigned OCTET_OFS = 0,
  parameter int unsigned SKEW1     = 0
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       sync_n,
  output lane_word_t tx [LANES_PER_AFE]
);

  typedef enum int {S_CGS, S_WAIT, S_ILAS, S_DATA} st_e;
  st_e         st;
  int unsigned lmfc;        // word counter within multiframe (free running)
  int unsigned widx;        // word index in ILAS / data phase
  logic [14:0] scr_st [LANES_PER_AFE];
  logic [7:0]  last_oct [LANES_PER_AFE];
  lane_word_t  gen [LANES_PER_AFE];
  lane_word_t  prev [LANES_PER_AFE];
  lane_word_t  dl1 [64];

  function automatic logic [15:0] sample(int unsigned ch, int unsigned fn);
    return {4'(AFE_ID), 4'(ch), 8'(fn >> SLOW)};
  endfunction

  function automatic logic [7:0] cfg_oct(int unsigned l, int unsigned j);
    logic [7:0] c [14];
    c[0] = 8'h5A; c[1] = 8'h00; c[2] = 8'(LID0 + l); c[3] = {SCR, 7'(JESD_L - 1)};
    c[4] = 8'(JESD_F - 1); c[5] = 8'(JESD_K - 1); c[6] = 8'(JESD_M - 1);
    c[7] = 8'h0F; c[8] = 8'h2F; c[9] = 8'h20; c[10] = 8'h00; c[11] = 8'h00; c[12] = 8'h00;
    c[13] = '0;
    for (int i = 0; i < 13; i++) c[13] = c[13] + c[i];
    return c[j];
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      st <= S_CGS; lmfc <= 0; widx <= 0;
      for (int l = 0; l < LANES_PER_AFE; l++) begin
        scr_st[l] = '0; last_oct[l] = '0;
        gen[l] <= '{charisk: 4'hF, data: {4{K_K}}};
      end
    end else begin
      lmfc <= (lmfc + 1) % WORDS_PER_MF;
      case (st)
        S_CGS: if (sync_n) st <= S_WAIT;
        S_WAIT: if (lmfc == WORDS_PER_MF - 1) begin st <= S_ILAS; widx <= 0; end
        S_ILAS: if (widx == ILAS_MF * WORDS_PER_MF - 1) begin st <= S_DATA; widx <= 0; end
                else widx <= widx + 1;
        S_DATA: widx <= widx + 1;
        default: ;
      endcase
      if (!sync_n && st != S_CGS) st <= S_CGS;
      for (int l = 0; l < LANES_PER_AFE; l++) begin
        lane_word_t w;
        w = '{charisk: 4'hF, data: {4{K_K}}};
        if (st == S_WAIT && lmfc == WORDS_PER_MF - 1) begin
          // first ILAS word is produced next, see S_ILAS branch (widx 0)
        end
        if ((st == S_WAIT && lmfc == WORDS_PER_MF - 1) || (st == S_ILAS && widx != ILAS_MF * WORDS_PER_MF - 1)) begin
          int unsigned wi;
          wi = (st == S_WAIT) ? 0 : widx + 1;
          for (int o = 0; o < 4; o++) begin
            int unsigned mo;  // octet within multiframe
            mo = (wi % WORDS_PER_MF) * 4 + o;
            w.charisk[o] = 1'b0;
            w.data[8*o +: 8] = 8'(mo);
            if (mo == 0) begin w.charisk[o] = 1'b1; w.data[8*o +: 8] = K_R; end
            else if (mo == JESD_F * JESD_K - 1) begin w.charisk[o] = 1'b1; w.data[8*o +: 8] = K_A; end
            else if (wi / WORDS_PER_MF == 1 && mo == 1) begin w.charisk[o] = 1'b1; w.data[8*o +: 8] = K_Q; end
            else if (wi / WORDS_PER_MF == 1 && mo >= 2 && mo < 16) w.data[8*o +: 8] = cfg_oct(l, mo - 2);
          end
        end else if ((st == S_ILAS && widx == ILAS_MF * WORDS_PER_MF - 1) || st == S_DATA) begin
          int unsigned wi, fn, fw;
          wi = (st == S_ILAS) ? 0 : widx + 1;
          fn = wi / WORDS_PER_FRAME;
          fw = wi % WORDS_PER_FRAME;
          for (int o = 0; o < 4; o++) begin
            logic [15:0] s;
            logic [7:0]  d, e;
            int unsigned fo;
            fo = fw * 4 + o;              // octet within frame
            s  = sample(8 * l + fo / 2, fn);
            d  = (fo % 2 == 0) ? s[15:8] : s[7:0];
            if (SCR) begin
              for (int b = 7; b >= 0; b--) begin
                logic sb;
                sb = d[b] ^ scr_st[l][13] ^ scr_st[l][14];
                e[b] = sb;
                scr_st[l] = {scr_st[l][13:0], sb};
              end
            end else e = d;
            w.charisk[o] = 1'b0;
            w.data[8*o +: 8] = e;
            if (fo == JESD_F - 1) begin
              logic mf_end;
              mf_end = ((wi % WORDS_PER_MF) == WORDS_PER_MF - 1);
              if (SCR) begin
                if (mf_end && e == K_A) w.charisk[o] = 1'b1;
                else if (!mf_end && e == K_F) w.charisk[o] = 1'b1;
              end else if (e == last_oct[l]) begin
                w.charisk[o] = 1'b1;
                w.data[8*o +: 8] = mf_end ? K_A : K_F;
              end
              last_oct[l] = e;
            end
          end
        end
        gen[l] <= w;
      end
    end
  end

  // octet offset and lane skew
  always @(posedge clk) begin
    for (int l = 0; l < LANES_PER_AFE; l++) prev[l] <= gen[l];
  end
  lane_word_t shifted [LANES_PER_AFE];
  always_comb begin
    for (int l = 0; l < LANES_PER_AFE; l++) begin
      if (OCTET_OFS == 0) shifted[l] = gen[l];
      else begin
        shifted[l].data    = 32'({gen[l].data, prev[l].data} >> (8 * (4 - OCTET_OFS)));
        shifted[l].charisk = 4'({gen[l].charisk, prev[l].charisk} >> (4 - OCTET_OFS));
      end
    end
  end
  always @(posedge clk) begin
    dl1[0] <= shifted[1];
    for (int i = 1; i < 64; i++) dl1[i] <= dl1[i-1];
  end
  assign tx[0] = shifted[0];
  assign tx[1] = (SKEW1 == 0) ? shifted[1] : dl1[SKEW1 - 1];

endmodule
