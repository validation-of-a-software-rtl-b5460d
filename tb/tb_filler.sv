// tb_filler: a 64-bit stream with random gaps is padded to 1024 bits. The
// live bits must pass unchanged, each of the 60 dummy samples must read
// {position, frame count}, and valid/sset_start must follow one clock later.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_filler;
  import ltl_pkg::*;
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] s_data = '0;
  logic s_valid = 0, s_sset = 0;
  logic [AXIS_W-1:0] m_data;
  logic m_valid, m_sset;
  filler #(.IN_W(64)) dut (.clk, .rst, .s_tdata(s_data), .s_tvalid(s_valid), .s_sset_start(s_sset),
    .m_tdata(m_data), .m_tvalid(m_valid), .m_sset_start(m_sset));

  int unsigned sent = 0, got = 0, frames = 0;
  logic [63:0] exp_d [$];
  logic        exp_s [$];
  int unsigned exp_f [$];

  always @(posedge clk) if (!rst) begin
    if (m_valid) begin
      logic [63:0] d; logic s; int unsigned f;
      d = exp_d.pop_front(); s = exp_s.pop_front(); f = exp_f.pop_front();
      checks++;
      if (m_data[63:0] !== d || m_sset !== s) begin failures++; $display("live bits wrong at %0d", got); end
      for (int i = 0; i < 60; i++) begin
        checks++;
        if (m_data[64 + 16*i +: 16] !== {8'(4 + i), 8'(f)}) begin
          failures++; if (failures < 5) $display("pad %0d wrong: %h", i, m_data[64 + 16*i +: 16]);
        end
      end
      got++;
    end
    if (sent < 400 && $urandom_range(3) != 0) begin
      logic [63:0] d; logic s;
      d = {$urandom, $urandom}; s = (sent % 4 == 0);
      if (s) frames++;
      s_data <= d; s_sset <= s; s_valid <= 1'b1;
      exp_d.push_back(d); exp_s.push_back(s); exp_f.push_back(s ? frames : frames);
      sent++;
    end else begin
      s_valid <= 1'b0; s_sset <= 1'b0;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    wait (got == 400);
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
