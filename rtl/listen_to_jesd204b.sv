// listen_to_jesd204b: JESD204B receive core for one AFE (two lanes, one per
// 8-channel ADC bank), after the PHY's deserialiser and 8b/10b decoder.
//
// Per lane the words pass an input register, code group synchronisation
// (jesd_cgs_fsm), octet alignment (jesd_octet_align), the ILAS monitor
// (jesd_ilas_monitor), character-replacement undo and descrambling
// (jesd_descrambler) and an elastic buffer (jesd_elastic_buffer). SYNC~ is
// held low until every lane has code group synchronisation. The elastic
// buffers are read together once all lanes have delivered their first data
// word, which is the first word of a multiframe on every lane; from then on
// one 64-bit word leaves per clock. The deframer unpacks each lane word into
// two 16-bit samples (octet 0 is the MSB of the first sample) and the output
// register presents them as a stream:
//   m_tdata[15:0]  lane 0 sample 2w     m_tdata[31:16] lane 0 sample 2w+1
//   m_tdata[47:32] lane 1 sample 2w     m_tdata[63:48] lane 1 sample 2w+1
// where w = 0..3 is the word index within the 4-word frame; lane 0 carries
// channels 0..7, lane 1 channels 8..15 of the AFE. m_tuser[0] marks the
// first word of a multiframe, m_tuser[1] a sticky error (ILAS mismatch,
// unexpected control character or elastic-buffer overflow). There is no
// back-pressure: the stream runs at the link rate.
// The stage order follows the block diagram of the ListenToJESD204B core;
// the internals of each stage are this design's own.
module listen_to_jesd204b
  import ltl_pkg::*;
#(
  parameter int unsigned LID0     = 0,   // lane ID expected on lane 0
  parameter int unsigned EB_DEPTH = 16   // elastic buffer depth in words
) (
  input  logic                      clk,       // device clock (line rate / 40)
  input  logic                      rst,
  input  lane_word_t                rx  [LANES_PER_AFE],
  input  logic [3:0]                rx_dec_err [LANES_PER_AFE],
  output logic                      sync_n,    // JESD204B SYNC~ to the AFE
  output logic [AFE_W-1:0]          m_tdata,
  output logic                      m_tvalid,
  output logic [1:0]                m_tuser,
  output logic                      link_up,   // data flowing on all lanes
  output logic                      ilas_err
);

  localparam int unsigned NL = LANES_PER_AFE;

  lane_word_t rx_q [NL];
  logic [3:0] err_q [NL];
  logic [NL-1:0] cgs_done, al_valid, al_first, dv, dfirst, scr, ilas_e, ilas_d, d_valid,
                 d_mfs, cerr, eb_empty, eb_ovf;
  lane_word_t al_word [NL];
  logic [5:0] mfw [NL];
  logic [31:0] d_word [NL];
  logic [32:0] eb_dout [NL];
  logic released_q;
  logic rd_en;

  for (genvar l = 0; l < NL; l++) begin : g_lane
    always_ff @(posedge clk) begin   // input register
      rx_q[l]  <= rx[l];
      err_q[l] <= rx_dec_err[l];
    end

    jesd_cgs_fsm u_cgs (
      .clk, .rst, .in(rx_q[l]), .dec_err(err_q[l]), .cgs_done(cgs_done[l]));

    jesd_octet_align u_align (
      .clk, .rst, .cgs_done(cgs_done[l]), .in(rx_q[l]), .out(al_word[l]),
      .out_valid(al_valid[l]), .ilas_start(al_first[l]));

    jesd_ilas_monitor #(.EXP_LID(LID0 + l)) u_ilas (
      .clk, .rst, .in(al_word[l]), .in_valid(al_valid[l]), .ilas_start(al_first[l]),
      .data_valid(dv[l]), .mf_word(mfw[l]), .data_first(dfirst[l]), .scr_en(scr[l]),
      .ilas_done(ilas_d[l]), .ilas_err(ilas_e[l]));

    jesd_descrambler u_descr (
      .clk, .rst, .in(al_word[l]), .in_valid(dv[l]), .first(dfirst[l]), .mf_word(mfw[l]),
      .scr_en(scr[l]), .out(d_word[l]), .out_valid(d_valid[l]), .out_mf_start(d_mfs[l]),
      .char_err(cerr[l]));

    jesd_elastic_buffer #(.W(33), .DEPTH(EB_DEPTH)) u_eb (
      .clk, .rst(rst || !ilas_d[l]), .wr_en(d_valid[l]), .din({d_mfs[l], d_word[l]}),
      .rd_en(rd_en), .dout(eb_dout[l]), .empty(eb_empty[l]), .overflow(eb_ovf[l]));
  end

  // SYNC~: low until all lanes have code group synchronisation
  always_ff @(posedge clk) begin
    if (rst) sync_n <= 1'b0;
    else     sync_n <= &cgs_done;
  end

  // release the elastic buffers together once every lane holds data
  always_ff @(posedge clk) begin
    if (rst || !(&ilas_d)) released_q <= 1'b0;
    else if (!(|eb_empty)) released_q <= 1'b1;
  end
  assign rd_en = released_q && !(|eb_empty);

  // deframer + output register
  logic err_any;
  assign err_any = |{ilas_e, cerr, eb_ovf};
  always_ff @(posedge clk) begin
    if (rst) begin
      m_tdata  <= '0;
      m_tvalid <= 1'b0;
      m_tuser  <= '0;
    end else begin
      m_tvalid <= rd_en;
      m_tuser  <= {err_any, rd_en && eb_dout[0][32]};
      for (int l = 0; l < NL; l++)
        for (int s = 0; s < 2; s++)
          m_tdata[32*l + 16*s +: 16] <= {eb_dout[l][16*s +: 8], eb_dout[l][16*s + 8 +: 8]};
    end
  end

  assign link_up  = released_q;
  assign ilas_err = err_any;

endmodule
