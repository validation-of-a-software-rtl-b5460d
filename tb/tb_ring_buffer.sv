// tb_ring_buffer: the full-size 4 MiB buffer. Random writes and reads are
// checked against a shadow copy in the testbench: read data must appear one
// clock after the read, a read of the word being written returns the old
// value, and words at the first and last address survive.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_ring_buffer;
  import ltl_pkg::*;
  localparam int unsigned AW = $clog2(RING_DEPTH);
  logic clk = 0;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0, re = 0;
  logic [AW-1:0] wa = '0, ra = '0;
  logic [AXIS_W-1:0] wd = '0, rd;
  ring_buffer dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rd));

  logic [AXIS_W-1:0] shadow [int unsigned];
  function automatic logic [AXIS_W-1:0] pat(int unsigned a, int unsigned k);
    logic [AXIS_W-1:0] v;
    for (int i = 0; i < AXIS_W / 32; i++) v[32*i +: 32] = (a * 32'h9E3779B1) ^ (k << 8) ^ i;
    return v;
  endfunction

  initial begin
    // write a set of addresses including both ends
    int unsigned addrs [$];
    addrs.push_back(0); addrs.push_back(RING_DEPTH - 1);
    for (int i = 0; i < 300; i++) addrs.push_back($urandom_range(RING_DEPTH - 1));
    foreach (addrs[i]) begin
      @(posedge clk);
      we <= 1; wa <= AW'(addrs[i]); wd <= pat(addrs[i], i);
      shadow[addrs[i]] = pat(addrs[i], i);
    end
    @(posedge clk); we <= 0;
    // read them back, one per clock
    foreach (addrs[i]) begin
      @(posedge clk); re <= 1; ra <= AW'(addrs[i]);
      if (i > 0) begin
        @(negedge clk);
        checks++;
        if (rd !== shadow[addrs[i-1]]) begin failures++; $display("addr %0d wrong", addrs[i-1]); end
      end
    end
    @(posedge clk); re <= 0;
    @(negedge clk);
    checks++;
    if (rd !== shadow[addrs[addrs.size()-1]]) begin failures++; $display("last read wrong"); end
    // read-during-write of the same word returns the old word
    @(posedge clk); we <= 1; re <= 1; wa <= AW'(5); ra <= AW'(5); wd <= '1;
    if (!shadow.exists(5)) shadow[5] = '0;
    @(posedge clk); we <= 0; re <= 1;
    @(negedge clk);
    checks++;
    if (rd === '1 && shadow[5] !== '1) begin failures++; $display("read-during-write returned new data"); end
    @(posedge clk); re <= 0;
    @(negedge clk);
    checks++;
    if (rd !== '1) begin failures++; $display("write during read lost"); end
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
