// tb_ltl_pl_top: end-to-end run of the PL datapath at its default size
// (one 16-channel AFE padded to the 1024-bit, 256-channel stream; 4 MiB ring
// buffer; 256 KB blocks), playing the roles of the AFE (JESD204B
// transmitter model), the processor software (register writes, interrupt
// handling, one RDMA WRITE per block, block release) and the RDMA engine
// (AXI4 reader at 29 % duty, i.e. 95.6 of 327.7 Gb/s).
//   Phase 1, US pulse-echo: software start fires the pulser; after the
//     60-clock delay a 3072-sample frame (six 256 KB blocks) is captured
//     and streamed; every received word is checked against the samples the
//     AFE model sent and the filler's dummy pattern.
//   Phase 2, OA: two external trigger edges, the second during the delay
//     (missed); a 1000-sample frame ends inside its second block (partial
//     block) and the ring buffer wraps.
//   Phase 3, leaky bucket: a 14000-sample frame is longer than the buffer
//     can absorb at this read rate, so the overflow flag must rise.
// Each mechanism is counted and a mechanism that never happened fails.
//
// Following the paper: the 60-clock trigger delay, a US frame sent as six
// 256 KB blocks, padding of 16 live channels to 256, a read rate of 95.6 of
// 327.7 Gb/s. The OA frame sizes, the overflow frame and all checks are
// this design's own.
module tb_ltl_pl_top;
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
  lane_word_t phy_rx [2];
  logic [3:0] dec_err [2];
  assign dec_err[0] = '0;
  assign dec_err[1] = '0;
  logic [0:0] sync_n;
  logic oa_trig = 0, ptrig, frame_irq, block_irq;

  afe_jesd_tx_model #(.AFE_ID(9), .LID0(0), .SCR(1'b1), .OCTET_OFS(2), .SKEW1(1)) u_afe (
    .clk(dev_clk), .rst(dev_rst), .sync_n(sync_n[0]), .tx(phy_rx));

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

  ltl_pl_top dut (
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
  logic [7:0] fill0 = '0;
  logic check_data = 1'b1;
  function automatic logic [15:0] smp(int unsigned ch, int unsigned fn);
    return {4'(9), 4'(ch), 8'(fn)};
  endfunction
  always @(posedge sys_clk) if (!sys_rst && host_valid && check_data) begin
    int unsigned w, fn;
    if (words_in_frame == 0) begin
      frame_words = exp_frame_words.pop_front();
      fn0 = host_data[7:0];
      fill0 = host_data[71:64];
    end
    w  = words_in_frame % 4;
    fn = fn0 + words_in_frame / 4;
    checks++;
    if (host_data[63:0] !== {smp(8 + 2*w + 1, fn), smp(8 + 2*w, fn), smp(2*w + 1, fn), smp(2*w, fn)}) begin
      failures++; if (failures < 8) $display("host word %0d of frame: live samples %h", words_in_frame, host_data[63:0]);
    end
    for (int i = 0; i < 60; i++)
      if (host_data[64 + 16*i +: 16] !== {8'(4 + i), 8'(fill0 + 8'(words_in_frame / 4))}) begin
        failures++; if (failures < 8) $display("host word %0d: dummy sample %0d %h", words_in_frame, i, host_data[64 + 16*i +: 16]);
        break;
      end
    host_words++;
    words_in_frame = (words_in_frame + 1 == frame_words) ? 0 : words_in_frame + 1;
  end

  // ---------------- sequence ----------------
  initial begin
    logic [31:0] d;
    int unsigned blk0;
    repeat (8) @(posedge dev_clk); dev_rst <= 0;
    repeat (2) @(posedge sys_clk); sys_rst <= 0;
    // link up
    do reg_rd(8'h20, d); while (d[0] != 1'b1 || d[3] != 1'b1);
    chk(d[1] == 1'b0, "JESD error flag after link up");
    $display("link up at clock %0d", cyc);

    // ---- phase 1: US pulse-echo, paper defaults (60-clock delay, 6 x 256 KB) ----
    reg_wr(8'h00, 32'h2);                 // US mode, trigger enabled
    exp_frame_words.push_back(3072 * 4);
    reg_wr(8'h04, 32'd1);                 // software start
    wait (n_done == 6);
    repeat (20) @(posedge sys_clk);
    chk(n_pulser == 1, $sformatf("pulser triggers %0d", n_pulser));
    chk(t_frame > t_pulser + 60 && t_frame <= t_pulser + 60 + 8,
        $sformatf("frame start %0d clocks after pulser trigger", t_frame - t_pulser));
    chk(n_block_irq == 6 && n_partial == 0, $sformatf("US frame: %0d blocks %0d partial", n_block_irq, n_partial));
    chk(host_words == 3072 * 4, $sformatf("US frame: %0d words received", host_words));
    reg_rd(8'h24, d); chk(d == 1, "FRAME_CNT after US frame");

    // ---- phase 2: OA, external trigger, partial block, missed trigger, wrap ----
    reg_wr(8'h08, 32'd400);
    reg_wr(8'h0C, 32'd1000);
    reg_wr(8'h00, 32'h3);                 // OA mode
    for (int f = 0; f < 6; f++) begin
      exp_frame_words.push_back(1000 * 4);
      #5.3 oa_trig = 1; repeat (20) @(posedge sys_clk); oa_trig = 0;
      if (f == 0) begin                   // a second edge inside the delay
        repeat (20) @(posedge sys_clk); oa_trig = 1; repeat (20) @(posedge sys_clk); oa_trig = 0;
      end
      wait (n_done == 6 + 2 * (f + 1));
      repeat (20) @(posedge sys_clk);
    end
    chk(host_words == 3072 * 4 + 6 * 4000, $sformatf("OA frames: %0d words received", host_words));
    reg_rd(8'h34, d);
    chk(d[31:16] == 1 && d[15:0] == 7, $sformatf("trigger counts accepted %0d missed %0d", d[15:0], d[31:16]));
    chk(n_partial == 6, $sformatf("partial blocks %0d", n_partial));
    chk(n_wrap >= 1, "ring buffer wrapped");
    reg_rd(8'h20, d); chk(d[2] == 1'b0, "no overflow so far");
    reg_rd(8'h38, d); chk(d == 0, $sformatf("blocks still occupied %0d", d));

    // ---- phase 3: leaky bucket overflow ----
    check_data = 1'b0;
    reg_wr(8'h08, 32'd60);
    reg_wr(8'h0C, 32'd14000);
    #5.3 oa_trig = 1; repeat (20) @(posedge sys_clk); oa_trig = 0;
    repeat (14000 * 4 + 200) @(posedge sys_clk);
    reg_rd(8'h20, d);
    chk(d[2] == 1'b1, "overflow flagged for a frame beyond the leaky-bucket limit");

    $display("mechanisms: pulser %0d, frame irq %0d, block irq %0d, partial blocks %0d, wraps %0d, read stalls %0d, overflow %0d",
             n_pulser, n_frame_irq, n_block_irq, n_partial, n_wrap, stalls, d[2]);
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
