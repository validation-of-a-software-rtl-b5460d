// tb_stream_coalescer: three AFE streams with different start times, amounts
// of leading data and random FIFO gaps. Each word carries {afe, sequence
// number}; the multiframe tag is on every 64th sequence number, the same on
// all streams, as SYSREF guarantees. Checks: every output word holds the
// same sequence number in all three slots, consecutive output words have
// consecutive numbers, the first output is at the first common tag (64),
// sset_start/mf_start flags match the sequence number, and after one stream
// loses a word the block realigns (counted) and resumes aligned output.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_stream_coalescer;
  import ltl_pkg::*;
  localparam int unsigned NA = 3;
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [AFE_W-1:0] s_data [NA];
  logic [NA-1:0] s_mfs, s_empty, s_rd;
  logic [NA*AFE_W-1:0] m_data;
  logic m_valid, m_sset, m_mfs, aligned;
  logic [15:0] realign;

  stream_coalescer #(.N_AFE(NA)) dut (.clk, .rst, .s_data, .s_mf_start(s_mfs), .s_empty,
    .s_rd_en(s_rd), .m_tdata(m_data), .m_tvalid(m_valid), .m_sset_start(m_sset),
    .m_mf_start(m_mfs), .aligned, .realign_cnt(realign));

  // source queues: head sequence number and tail (next to produce)
  int unsigned head [NA], tail [NA];
  int unsigned start_dly [NA] = '{3, 17, 40};
  int unsigned first_seq [NA] = '{50, 60, 20};
  logic dropped = 1'b0;
  int unsigned cyc = 0;

  always_comb
    for (int a = 0; a < NA; a++) begin
      s_empty[a] = (head[a] == tail[a]);
      s_data[a]  = {32'(a), 32'(head[a])};
      s_mfs[a]   = (head[a] % 64 == 0);
    end

  initial for (int a = 0; a < NA; a++) begin head[a] = first_seq[a]; tail[a] = first_seq[a]; end

  always @(posedge clk) if (!rst) begin
    cyc <= cyc + 1;
    for (int a = 0; a < NA; a++) begin
      int unsigned h, t;
      h = head[a]; t = tail[a];
      if (s_rd[a]) begin
        if (h == t) begin failures++; $display("read from empty source %0d", a); end
        h = h + 1;
      end
      if (cyc >= start_dly[a] && $urandom_range(5) != 0 && t - h < 12) t = t + 1;
      // at one point stream 1 loses a word
      if (a == 1 && !dropped && h == 1000 && t > h) begin h = h + 1; dropped = 1'b1; end
      head[a] <= h; tail[a] <= t;
    end
  end

  int unsigned nout = 0, last_seq = 0, nreal_runs = 0;
  always @(posedge clk) if (!rst && m_valid) begin
    int unsigned s0;
    s0 = m_data[31:0];
    checks++;
    if (!(dropped && s0 >= 1000 && s0 < 1024))
    for (int a = 0; a < NA; a++)
      if (m_data[a*AFE_W +: 32] != s0 || m_data[a*AFE_W + 32 +: 32] != 32'(a)) begin
        failures++; if (failures < 8) $display("beat %0d misaligned: %h", nout, m_data);
      end
    checks++;
    if (nout == 0 && s0 != 64) begin failures++; $display("first word seq %0d", s0); end
    if (nout > 0 && s0 != last_seq + 1) begin
      nreal_runs++;
      if (s0 % 64 != 0) begin failures++; $display("resumed off a multiframe start %0d", s0); end
    end
    checks++;
    if (m_mfs != (s0 % 64 == 0) || m_sset != (s0 % 4 == 0)) begin
      failures++; if (failures < 8) $display("flags wrong at seq %0d", s0);
    end
    last_seq = s0;
    nout++;
  end

  initial begin
    repeat (5) @(posedge clk); rst <= 0;
    wait (nout == 3000);
    checks++; if (realign == 0 || nreal_runs == 0) begin failures++; $display("no realignment seen"); end
    $display("realignments %0d", realign);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs", nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
