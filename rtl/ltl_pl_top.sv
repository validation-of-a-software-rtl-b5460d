// ltl_pl_top: programmable-logic datapath of the ListenToLight acquisition
// system, from the JESD204B PHY outputs to the ring buffer read by the RDMA
// engine.
//
// Chain (device clock, then system clock):
//   per AFE: listen_to_jesd204b -> cdc_fifo          (device clock -> system)
//   stream_coalescer -> filler -> frame_window -> block_gen -> ring_buffer
//   ring_buffer -> bram_ctrl (AXI4 read port for the RDMA engine)
//   trigger_ctrl opens frame windows; pl_regs holds the software settings.
// N_AFE sets the number of 16-channel AFE groups. The default, 1, is the
// 16-channel demonstration system: 64 live bits are padded by the filler to
// the 1024-bit width of the 256-channel datapath, so everything behind the
// filler carries full-system traffic. With N_AFE = 16 (256 channels) the
// coalesced stream is already 1024 bits wide and no filler is generated.
// Interrupts: frame_irq when a frame window opens, block_irq when a block of
// the ring buffer is ready to send. The RDMA engine, the 100G MAC, the PHY
// and the processor are outside: their signals are this module's ports.
// Two clocks: dev_clk (JESD204B device clock, line rate / 40 = 320 MHz) and
// sys_clk (PL system clock; it must be at least as fast as dev_clk).
//
// Following the paper: the order of the stages, the 1024-bit datapath, the
// 4 MiB ring buffer, 256 KB blocks, padding of a 16-channel system to 256
// channels. This design's choices: the register file, block occupancy
// tracking, the default of one AFE (the demonstration system).
module ltl_pl_top
  import ltl_pkg::*;
#(
  parameter int unsigned N_AFE = 1
) (
  input  logic              dev_clk,
  input  logic              dev_rst,
  input  logic              sys_clk,
  input  logic              sys_rst,
  // JESD204B PHY outputs (two lanes per AFE) and SYNC~ back to the AFEs
  input  lane_word_t        phy_rx      [N_AFE*LANES_PER_AFE],
  input  logic [3:0]        phy_dec_err [N_AFE*LANES_PER_AFE],
  output logic [N_AFE-1:0]  jesd_sync_n,
  // triggers
  input  logic              oa_trig_i,
  output logic              pulser_trig_o,
  // interrupts to the processor
  output logic              frame_irq,
  output logic              block_irq,
  // AXI4-Lite register port (processor)
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  input  logic [31:0]       s_axil_wdata,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output logic [1:0]        s_axil_bresp,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  input  logic [7:0]        s_axil_araddr,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  // AXI4 read port of the ring buffer (RDMA engine)
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  input  logic [21:0]       s_axi_araddr,
  input  logic [7:0]        s_axi_arlen,
  input  logic [3:0]        s_axi_arid,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output logic [AXIS_W-1:0] s_axi_rdata,
  output logic              s_axi_rlast,
  output logic [3:0]        s_axi_rid,
  output logic [1:0]        s_axi_rresp
);

  localparam int unsigned LIVE_W = N_AFE * AFE_W;
  localparam int unsigned RAW    = $clog2(RING_DEPTH);

  // ---------------- JESD204B receive, one core per AFE ----------------
  logic [N_AFE-1:0] link_up, jesd_err, cdc_ovf;
  logic [AFE_W-1:0] cf_data [N_AFE];
  logic [N_AFE-1:0] cf_mfs, cf_empty, cf_rd;

  for (genvar a = 0; a < N_AFE; a++) begin : g_afe
    lane_word_t rx [LANES_PER_AFE];
    logic [3:0] de [LANES_PER_AFE];
    logic [AFE_W-1:0] td;
    logic tv;
    logic [1:0] tu;
    for (genvar l = 0; l < LANES_PER_AFE; l++) begin : g_l
      assign rx[l] = phy_rx[a*LANES_PER_AFE + l];
      assign de[l] = phy_dec_err[a*LANES_PER_AFE + l];
    end
    listen_to_jesd204b #(.LID0(0)) u_jesd (
      .clk(dev_clk), .rst(dev_rst), .rx(rx), .rx_dec_err(de), .sync_n(jesd_sync_n[a]),
      .m_tdata(td), .m_tvalid(tv), .m_tuser(tu), .link_up(link_up[a]), .ilas_err(jesd_err[a]));
    cdc_fifo #(.W(AFE_W + 1), .DEPTH(16)) u_cdc (
      .wr_clk(dev_clk), .wr_rst(dev_rst), .wr_en(tv), .wr_data({tu[0], td}),
      .wr_overflow(cdc_ovf[a]),
      .rd_clk(sys_clk), .rd_rst(sys_rst), .rd_en(cf_rd[a]),
      .rd_data({cf_mfs[a], cf_data[a]}), .rd_empty(cf_empty[a]));
  end

  // slow status bits into the system clock
  logic [2:0] st_s1, st_s2;
  always_ff @(posedge sys_clk) begin
    st_s1 <= {|cdc_ovf, |jesd_err, &link_up};
    st_s2 <= st_s1;
  end

  // ---------------- coalescing and padding ----------------
  logic [LIVE_W-1:0] co_data;
  logic co_valid, co_sset, co_mfs, co_aligned;
  logic [15:0] co_realign;
  stream_coalescer #(.N_AFE(N_AFE)) u_coal (
    .clk(sys_clk), .rst(sys_rst), .s_data(cf_data), .s_mf_start(cf_mfs), .s_empty(cf_empty),
    .s_rd_en(cf_rd), .m_tdata(co_data), .m_tvalid(co_valid), .m_sset_start(co_sset),
    .m_mf_start(co_mfs), .aligned(co_aligned), .realign_cnt(co_realign));

  logic [AXIS_W-1:0] fl_data;
  logic fl_valid, fl_sset;
  if (LIVE_W < AXIS_W) begin : g_fill
    filler #(.IN_W(LIVE_W)) u_fill (
      .clk(sys_clk), .rst(sys_rst), .s_tdata(co_data), .s_tvalid(co_valid),
      .s_sset_start(co_sset), .m_tdata(fl_data), .m_tvalid(fl_valid), .m_sset_start(fl_sset));
  end else begin : g_nofill
    assign fl_data  = co_data;
    assign fl_valid = co_valid;
    assign fl_sset  = co_sset;
  end

  // ---------------- control registers and trigger ----------------
  acq_mode_e   mode;
  logic        trig_en, sw_start, release_blk;
  logic [15:0] trig_delay;
  logic [19:0] frame_len;
  logic [3:0]  block_log2;
  logic [7:0]  pulse_len;
  logic        win_start;
  logic [15:0] trig_cnt, missed_cnt, frame_cnt, blk_cnt;
  logic [RAW-1:0] blk_addr;
  logic [RAW:0]   blk_words, occupied;
  logic        overflow;

  pl_regs u_regs (
    .clk(sys_clk), .rst(sys_rst),
    .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready), .s_awaddr(s_axil_awaddr),
    .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready), .s_wdata(s_axil_wdata),
    .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready), .s_bresp(s_axil_bresp),
    .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready), .s_araddr(s_axil_araddr),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready), .s_rdata(s_axil_rdata),
    .s_rresp(s_axil_rresp),
    .mode(mode), .trig_enable(trig_en), .sw_start(sw_start), .trig_delay(trig_delay),
    .frame_len(frame_len), .block_log2(block_log2), .release_blk(release_blk),
    .pulse_len(pulse_len),
    .status({st_s2[2], co_aligned, overflow, st_s2[1], st_s2[0]}),
    .frame_cnt(frame_cnt), .blk_cnt(blk_cnt),
    .last_blk_addr(32'(blk_addr) << $clog2(BYTES_PER_BEAT)),
    .last_blk_len(32'(blk_words) << $clog2(BYTES_PER_BEAT)),
    .trig_cnt(trig_cnt), .missed_cnt(missed_cnt), .occupied(16'(occupied)));

  trigger_ctrl u_trig (
    .clk(sys_clk), .rst(sys_rst), .enable(trig_en), .mode(mode), .sw_start(sw_start),
    .oa_trig_i(oa_trig_i), .delay(trig_delay), .pulse_len(pulse_len),
    .pulser_trig_o(pulser_trig_o), .win_start(win_start), .trig_cnt(trig_cnt),
    .missed_cnt(missed_cnt));

  // ---------------- framing, blocks, buffer ----------------
  logic [AXIS_W-1:0] fw_data;
  logic fw_valid, fw_sof, fw_last, fw_busy;
  frame_window u_win (
    .clk(sys_clk), .rst(sys_rst), .s_tdata(fl_data), .s_tvalid(fl_valid),
    .s_sset_start(fl_sset), .win_start(win_start), .frame_len(frame_len),
    .m_tdata(fw_data), .m_tvalid(fw_valid), .m_tsof(fw_sof), .m_tlast(fw_last),
    .frame_irq(frame_irq), .busy(fw_busy), .frame_cnt(frame_cnt));

  logic mem_we, mem_re;
  logic [RAW-1:0] mem_waddr, mem_raddr;
  logic [AXIS_W-1:0] mem_wdata, mem_rdata;
  block_gen u_blk (
    .clk(sys_clk), .rst(sys_rst), .s_tdata(fw_data), .s_tvalid(fw_valid), .s_tlast(fw_last),
    .block_log2(block_log2), .release_blk(release_blk), .mem_we(mem_we),
    .mem_waddr(mem_waddr), .mem_wdata(mem_wdata), .blk_irq(block_irq), .blk_addr(blk_addr),
    .blk_words(blk_words), .blk_cnt(blk_cnt), .occupied(occupied), .overflow(overflow));

  ring_buffer u_ring (
    .clk(sys_clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));

  bram_ctrl u_bram (
    .clk(sys_clk), .rst(sys_rst),
    .s_arvalid(s_axi_arvalid), .s_arready(s_axi_arready), .s_araddr(s_axi_araddr),
    .s_arlen(s_axi_arlen), .s_arid(s_axi_arid), .s_rvalid(s_axi_rvalid),
    .s_rready(s_axi_rready), .s_rdata(s_axi_rdata), .s_rlast(s_axi_rlast),
    .s_rid(s_axi_rid), .s_rresp(s_axi_rresp),
    .mem_re(mem_re), .mem_raddr(mem_raddr), .mem_rdata(mem_rdata));

endmodule
