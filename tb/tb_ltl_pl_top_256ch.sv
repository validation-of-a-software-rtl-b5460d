// tb_ltl_pl_top_256ch: end-to-end run of the PL datapath in the 256-channel
// configuration (N_AFE = 16). Sixteen AFE models feed sixteen JESD204B
// receivers; each AFE has its own octet offset, lane skew and extra link
// delay (0..4 words), so the sixteen streams reach the merge stage at
// different times and must be aligned on their multiframe starts. With
// 16 x 64 = 1024 live bits no padding stage is built. Software starts US
// frames of 256 samples; every word that reaches the host is checked: AFE a
// in bits 64a+63:64a, all with the same frame number.
//
// Following the paper: 16 AFEs of 16 channels merged into one 1024-bit
// stream aligned on the multiframe start. Link delays, frame size and all
// checks are this design's own.
module tb_ltl_pl_top_256ch;
  localparam int unsigned NA = 16;
  import ltl_pkg::*;

  logic dev_clk = 0, sys_clk = 0, dev_rst = 1, sys_rst = 1;
  always #1.5625 dev_clk = ~dev_clk;   // 320 MHz device clock
  always #1.5    sys_clk = ~sys_clk;   // 333 MHz system clock
  int checks = 0, failures = 0;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- AFE model and DUT ----------------
  lane_word_t phy_rx [2*NA];
  logic [3:0] dec_err [2*NA];
  always_comb for (int i = 0; i < 2*NA; i++) dec_err[i] = '0;
  logic [NA-1:0] sync_n;
  logic oa_trig = 0, ptrig, frame_irq, block_irq;

  for (genvar a = 0; a < NA; a++) begin : g_afe
    lane_word_t tx [2];
    lane_word_t dly [5][2];
    afe_jesd_tx_model #(.AFE_ID(a), .LID0(0), .SCR(1'b1), .OCTET_OFS(a % 4), .SKEW1(a % 3)) u_afe (
      .clk(dev_clk), .rst(dev_rst), .sync_n(sync_n[a]), .tx(tx));
    always @(posedge dev_clk) begin
      dly[0] <= tx;
      for (int i = 1; i < 5; i++) dly[i] <= dly[i-1];
    end
    assign phy_rx[2*a]   = (a % 5 == 0) ? tx[0] : dly[a % 5 - 1][0];
    assign phy_rx[2*a+1] = (a % 5 == 0) ? tx[1] : dly[a % 5 - 1][1];
  end

  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1, arvalid = 0, arready, rvalid, rready = 1;
  logic [7:0] awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [1:0] bresp, rresp;
  logic x_arvalid, x_arready, x_rvalid, x_rready, x_rlast;
  logic [21:0] x_araddr;
  logic [7:0] x_arlen;
  logic [3:0] x_arid, x_rid;
  logic [1023:0] x_rdata;
  logic [1:0] x_rresp;

  ltl_pl_top #(.N_AFE(NA)) dut (
    .dev_clk, .dev_rst, .sys_clk, .sys_rst, .phy_rx, .phy_dec_err(dec_err), .jesd_sync_n(sync_n),
    .oa_trig_i(oa_trig), .pulser_trig_o(ptrig), .frame_irq, .block_irq,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_axi_arvalid(x_arvalid), .s_axi_arready(x_arready), .s_axi_araddr(x_araddr),
    .s_axi_arlen(x_arlen), .s_axi_arid(x_arid), .s_axi_rvalid(x_rvalid), .s_axi_rready(x_rready),
    .s_axi_rdata(x_rdata), .s_axi_rlast(x_rlast), .s_axi_rid(x_rid), .s_axi_rresp(x_rresp));

  logic wr_valid = 0, host_valid, wr_done;
  logic [21:0] wr_addr = '0;
  logic [22:0] wr_bytes = '0;
  logic [1023:0] host_data;
  int unsigned stalls;
  ernic_reader_model #(.DUTY_PCT(29)) u_ernic (
    .clk(sys_clk), .rst(sys_rst), .wr_valid, .wr_addr, .wr_bytes,
    .m_arvalid(x_arvalid), .m_arready(x_arready), .m_araddr(x_araddr), .m_arlen(x_arlen),
    .m_arid(x_arid), .m_rvalid(x_rvalid), .m_rready(x_rready), .m_rdata(x_rdata),
    .m_rlast(x_rlast), .host_valid, .host_data, .wr_done, .stall_cycles(stalls));

  // ---------------- AXI4-Lite master (processor) ----------------
  semaphore bus = new(1);
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    bus.get(1);
    @(posedge sys_clk); awvalid <= 1; awaddr <= a; wvalid <= 1; wdata <= d;
    do @(posedge sys_clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    @(posedge sys_clk);
    bus.put(1);
  endtask
  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    bus.get(1);
    @(posedge sys_clk); arvalid <= 1; araddr <= a;
    do @(posedge sys_clk); while (!arready);
    arvalid <= 0;
    do @(posedge sys_clk); while (!rvalid);
    d = rdata;
    bus.put(1);
  endtask

  // ---------------- mechanism counters ----------------
  int unsigned cyc = 0, n_pulser = 0, n_frame_irq = 0, n_block_irq = 0, n_partial = 0,
               n_wrap = 0, n_done = 0, t_pulser = 0, t_frame = 0;
  logic ptrig_q = 0;
  always @(posedge sys_clk) if (!sys_rst) begin
    cyc <= cyc + 1;
    ptrig_q <= ptrig;
    if (ptrig && !ptrig_q) begin n_pulser++; t_pulser = cyc; end
    if (frame_irq) begin n_frame_irq++; t_frame = cyc; end
    if (wr_done) n_done++;
  end

  // ---------------- processor: one RDMA WRITE per filled block ----------------
  int unsigned blocks_posted = 0, prev_blk_addr = 0;
  logic sw_enable = 1'b0;
  always @(posedge sys_clk) begin
    if (!sys_rst && block_irq) begin
      n_block_irq++;
      fork begin
        logic [31:0] a, l;
        reg_rd(8'h2C, a);
        reg_rd(8'h30, l);
        if (l != BLOCK_BYTES) n_partial++;
        if (blocks_posted > 0 && a < prev_blk_addr) n_wrap++;
        prev_blk_addr = a;
        @(posedge sys_clk);
        wr_valid <= 1; wr_addr <= 22'(a); wr_bytes <= 23'(l);
        @(posedge sys_clk);
        wr_valid <= 0;
        blocks_posted++;
      end join_none
    end
  end
  // release each block once its transfer completed (completion queue poll)
  always @(posedge sys_clk) if (!sys_rst && wr_done) fork reg_wr(8'h14, 32'd1); join_none

  // ---------------- host memory check ----------------
  int unsigned exp_frame_words [$];   // words per frame, in order
  int unsigned words_in_frame = 0, frame_words = 0, fn0 = 0, host_words = 0;
    function automatic logic [15:0] smp(int unsigned id, int unsigned ch, int unsigned fn);
    return {4'(id), 4'(ch), 8'(fn)};
  endfunction
  function automatic logic [63:0] afe_word(int unsigned id, int unsigned w, int unsigned fn);
    return {smp(id, 8 + 2*w + 1, fn), smp(id, 8 + 2*w, fn), smp(id, 2*w + 1, fn), smp(id, 2*w, fn)};
  endfunction
  always @(posedge sys_clk) if (!sys_rst && host_valid) begin
    int unsigned w, fn;
    if (words_in_frame == 0) begin
      frame_words = exp_frame_words.pop_front();
      fn0 = host_data[7:0];
    end
    w  = words_in_frame % 4;
    fn = fn0 + words_in_frame / 4;
    for (int k = 0; k < NA; k++) begin
      checks++;
      if (host_data[64*k +: 64] !== afe_word(k, w, fn)) begin
        failures++; if (failures < 8) $display("host word %0d: AFE %0d samples %h", words_in_frame, k, host_data[64*k +: 64]);
      end
    end
    host_words++;
    words_in_frame = (words_in_frame + 1 == frame_words) ? 0 : words_in_frame + 1;
  end

  // ---------------- sequence ----------------
  initial begin
    logic [31:0] d;
    repeat (8) @(posedge dev_clk); dev_rst <= 0;
    repeat (2) @(posedge sys_clk); sys_rst <= 0;
    do reg_rd(8'h20, d); while (d[0] != 1'b1 || d[3] != 1'b1);
    chk(d[1] == 1'b0 && d[4] == 1'b0, "error flags after link up");
    $display("both links up and streams aligned at clock %0d", cyc);
    reg_wr(8'h0C, 32'd256);
    reg_wr(8'h00, 32'h2);                 // US mode, trigger enabled
    for (int f = 0; f < 3; f++) begin
      exp_frame_words.push_back(256 * 4);
      reg_wr(8'h04, 32'd1);
      wait (n_done == f + 1);
      repeat (20) @(posedge sys_clk);
    end
    chk(host_words == 3 * 1024, $sformatf("%0d words received", host_words));
    chk(n_pulser == 3 && n_frame_irq == 3, $sformatf("pulser %0d frame irq %0d", n_pulser, n_frame_irq));
    chk(n_block_irq == 3 && n_partial == 3, $sformatf("blocks %0d partial %0d", n_block_irq, n_partial));
    reg_rd(8'h20, d); chk(d[3:0] == 4'b1001, $sformatf("status %b", d[4:0]));
    $display("mechanisms: pulser %0d, frame irq %0d, block irq %0d, partial blocks %0d, read stalls %0d",
             n_pulser, n_frame_irq, n_block_irq, n_partial, stalls);
    chk(stalls > 0, "reader back-pressure never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge sys_clk);
    failures++;
    $display("watchdog: host words %0d, blocks done %0d", host_words, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
