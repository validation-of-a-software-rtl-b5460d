// tb_frame_window: a numbered 1024-bit stream (sample-set start every four
// words, random gaps) is windowed several times with different frame
// lengths. Each frame must start on the first sample-set start after
// win_start, hold exactly 4 * frame_len consecutive words of the input,
// carry tsof on its first and tlast on its last word, and pulse frame_irq
// with its first word. A win_start during a frame must be ignored.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_frame_window;
  import ltl_pkg::*;
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [AXIS_W-1:0] s_data = '0, m_data;
  logic s_valid = 0, s_sset = 0, win = 0;
  logic [19:0] flen = 20'd5;
  logic m_valid, m_sof, m_last, irq, busy;
  logic [15:0] fcnt;
  frame_window dut (.clk, .rst, .s_tdata(s_data), .s_tvalid(s_valid), .s_sset_start(s_sset),
    .win_start(win), .frame_len(flen), .m_tdata(m_data), .m_tvalid(m_valid), .m_tsof(m_sof),
    .m_tlast(m_last), .frame_irq(irq), .busy, .frame_cnt(fcnt));

  int unsigned seq = 0;
  always @(posedge clk) if (!rst) begin
    if ($urandom_range(4) != 0) begin
      s_valid <= 1'b1; s_data <= AXIS_W'(seq) | (AXIS_W'(seq) << 1000); s_sset <= (seq % 4 == 0);
      seq <= seq + 1;
    end else begin
      s_valid <= 1'b0; s_sset <= 1'b0;
    end
  end

  int unsigned inframe = 0, words = 0, first = 0, prev = 0, nframes = 0;
  int unsigned exp_len [$];
  always @(posedge clk) if (!rst && m_valid) begin
    int unsigned v;
    v = m_data[31:0];
    checks++;
    if (m_data[1000 +: 24] != 24'(v)) begin failures++; $display("data corrupted"); end
    if (m_sof) begin
      checks++;
      if (inframe != 0 || v % 4 != 0 || !irq) begin failures++; $display("bad frame start at %0d", v); end
      inframe = 1; words = 1; first = v;
    end else begin
      checks++;
      if (inframe == 0 || v != prev + 1 || irq) begin failures++; $display("bad word %0d", v); end
      words++;
    end
    prev = v;
    if (m_last) begin
      int unsigned el;
      el = exp_len.pop_front();
      checks++;
      if (words != 4 * el) begin failures++; $display("frame of %0d words, expected %0d", words, 4 * el); end
      inframe = 0; nframes++;
    end
  end

  initial begin
    int unsigned lens [4] = '{5, 1, 13, 60};
    repeat (3) @(posedge clk); rst <= 0;
    for (int f = 0; f < 4; f++) begin
      repeat ($urandom_range(10, 3)) @(posedge clk);
      flen <= 20'(lens[f]); exp_len.push_back(lens[f]);
      win <= 1; @(posedge clk); win <= 0;
      repeat (3) @(posedge clk);
      win <= 1; @(posedge clk); win <= 0;     // ignored: frame in progress
      wait (!busy);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (nframes != 4 || fcnt != 4) begin failures++; $display("frames %0d count %0d", nframes, fcnt); end
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
