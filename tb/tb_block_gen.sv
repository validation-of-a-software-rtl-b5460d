// tb_block_gen: frames of assorted lengths go into a small ring (128 words,
// blocks of 16 words). An independent model predicts the address of every
// written word (consecutive, frames start on block boundaries, wrap at the
// end) and the address and length of every reported block. Blocks are
// released with a lag; in the last phase releases stop and the overflow flag
// must rise when the writer opens a block while all eight are occupied.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_block_gen;
  import ltl_pkg::*;
  localparam int unsigned AW = 7;
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [AXIS_W-1:0] s_data = '0, wdata;
  logic s_valid = 0, s_last = 0, rel = 0;
  logic [3:0] blog2 = 4'd4;
  logic we, irq, ovf;
  logic [AW-1:0] waddr, baddr;
  logic [AW:0] bwords, occ;
  logic [15:0] bcnt;
  block_gen #(.ADDR_W(AW)) dut (.clk, .rst, .s_tdata(s_data), .s_tvalid(s_valid), .s_tlast(s_last),
    .block_log2(blog2), .release_blk(rel), .mem_we(we), .mem_waddr(waddr), .mem_wdata(wdata),
    .blk_irq(irq), .blk_addr(baddr), .blk_words(bwords), .blk_cnt(bcnt), .occupied(occ), .overflow(ovf));

  // reference model
  int unsigned m_wp = 0, m_fill = 0, m_bstart = 0;
  int unsigned exp_addr [$], exp_baddr [$], exp_bwords [$];
  task automatic model_word(input bit last);
    if (m_fill == 0) m_bstart = m_wp;
    exp_addr.push_back(m_wp);
    m_fill++;
    if (m_fill == 16 || last) begin
      exp_baddr.push_back(m_bstart); exp_bwords.push_back(m_fill);
      m_wp = (m_bstart + 16) % 128; m_fill = 0;
    end else m_wp = (m_wp + 1) % 128;
  endtask

  int unsigned seq = 0, nblk = 0;
  always @(posedge clk) if (!rst) begin
    if (we) begin
      int unsigned a;
      a = exp_addr.pop_front();
      checks++;
      if (waddr != AW'(a) || wdata[31:0] != 32'(seq)) begin
        failures++; if (failures < 6) $display("write %0d at %0d, expected %0d", seq, waddr, a);
      end
      seq++;
    end
    if (irq) begin
      int unsigned ea, ew;
      ea = exp_baddr.pop_front(); ew = exp_bwords.pop_front();
      checks++;
      if (baddr != AW'(ea) || bwords != (AW+1)'(ew)) begin
        failures++; $display("block at %0d len %0d, expected %0d len %0d", baddr, bwords, ea, ew);
      end
      nblk++;
    end
  end

  int unsigned sent = 0;
  task automatic send_frame(input int unsigned len);
    for (int i = 0; i < len; i++) begin
      @(posedge clk);
      s_valid <= 1; s_last <= (i == len - 1); s_data <= AXIS_W'(sent); sent++;
      model_word(i == len - 1);
    end
    @(posedge clk); s_valid <= 0; s_last <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    // phase 1: frames with releases after each
    for (int f = 0; f < 12; f++) begin
      int unsigned len;
      len = $urandom_range(40, 3);
      send_frame(len);
      repeat (3) @(posedge clk);
      while (occ != 0) begin @(posedge clk); rel <= 1; @(posedge clk); rel <= 0; end
    end
    checks++;
    if (ovf) begin failures++; $display("overflow with timely releases"); end
    // phase 2: no releases, 9 blocks worth of data
    send_frame(16 * 8);
    repeat (3) @(posedge clk);
    checks++;
    if (ovf || occ != 8) begin failures++; $display("full ring: ovf %0d occ %0d", ovf, occ); end
    send_frame(5);
    repeat (3) @(posedge clk);
    checks++;
    if (!ovf) begin failures++; $display("overflow not flagged"); end
    checks++;
    if (exp_addr.size() != 0 || exp_baddr.size() != 0 || bcnt != 16'(nblk)) begin
      failures++; $display("missing writes or blocks");
    end
    $display("blocks %0d words %0d", nblk, seq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
