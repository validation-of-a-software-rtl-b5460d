// tb_pl_regs: AXI4-Lite accesses to the register file. Checks the reset
// values (60-clock delay, 3072 samples per frame, 256 KB blocks, 8-clock
// pulse), write and read-back of every writable register, one-clock pulses
// for START and RELEASE, the status inputs on their read addresses, zero
// for unmapped addresses, and the handshake rules with a slow master.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_pl_regs;
  import ltl_pkg::*;
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0, arvalid = 0, arready, rvalid, rready = 0;
  logic [7:0] awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [1:0] bresp, rresp;
  acq_mode_e mode;
  logic ten, swst, rel;
  logic [15:0] tdel;
  logic [19:0] flen;
  logic [3:0] bl2;
  logic [7:0] plen;
  pl_regs dut (.clk, .rst, .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_bvalid(bvalid), .s_bready(bready),
    .s_bresp(bresp), .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr), .s_rvalid(rvalid),
    .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp),
    .mode, .trig_enable(ten), .sw_start(swst), .trig_delay(tdel), .frame_len(flen), .block_log2(bl2),
    .release_blk(rel), .pulse_len(plen),
    .status(5'h15), .frame_cnt(16'd7), .blk_cnt(16'd42), .last_blk_addr(32'h0004_0000),
    .last_blk_len(32'h0004_0000), .trig_cnt(16'd3), .missed_cnt(16'd1), .occupied(16'd5));

  int unsigned n_start = 0, n_rel = 0;
  always @(posedge clk) if (!rst) begin
    if (swst) n_start++;
    if (rel) n_rel++;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk); awvalid <= 1; awaddr <= a; wvalid <= 1; wdata <= d;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    repeat ($urandom_range(2)) @(posedge clk);
    bready <= 1;
    do @(posedge clk); while (!bvalid);
    bready <= 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk); arvalid <= 1; araddr <= a;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    repeat ($urandom_range(2)) @(posedge clk);
    rready <= 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    rready <= 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk); rst <= 0;
    chk(tdel == 60 && flen == 3072 && bl2 == 11 && plen == 8 && mode == MODE_US && !ten, "reset values");
    rd(8'h08, d); chk(d == 60, "TRIG_DELAY reset read");
    rd(8'h0C, d); chk(d == 3072, "FRAME_LEN reset read");
    wr(8'h00, 32'h3); chk(mode == MODE_OA && ten, "CTRL write");
    rd(8'h00, d); chk(d == 3, "CTRL read");
    wr(8'h08, 32'd123); rd(8'h08, d); chk(d == 123 && tdel == 123, "TRIG_DELAY");
    wr(8'h0C, 32'd5639); rd(8'h0C, d); chk(d == 5639 && flen == 5639, "FRAME_LEN");
    wr(8'h10, 32'd4); rd(8'h10, d); chk(d == 4 && bl2 == 4, "BLOCK_LOG2");
    wr(8'h18, 32'd20); rd(8'h18, d); chk(d == 20 && plen == 20, "PULSE_LEN");
    wr(8'h04, 32'd1); wr(8'h04, 32'd1); wr(8'h14, 32'd1);
    repeat (2) @(posedge clk);
    chk(n_start == 2 && n_rel == 1, $sformatf("pulses: start %0d release %0d", n_start, n_rel));
    rd(8'h20, d); chk(d == 32'h15, "STATUS");
    rd(8'h24, d); chk(d == 7, "FRAME_CNT");
    rd(8'h28, d); chk(d == 42, "BLOCK_CNT");
    rd(8'h2C, d); chk(d == 32'h40000, "LAST_BLOCK");
    rd(8'h30, d); chk(d == 32'h40000, "LAST_LEN");
    rd(8'h34, d); chk(d == 32'h0001_0003, "TRIG_CNT");
    rd(8'h38, d); chk(d == 5, "OCCUPIED");
    rd(8'h7C, d); chk(d == 0, "unmapped");
    chk(bresp == 0 && rresp == 0, "responses OKAY");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
