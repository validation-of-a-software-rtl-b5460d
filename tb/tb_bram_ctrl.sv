// tb_bram_ctrl: AXI4 read bursts against a behavioural memory with one
// clock of read latency whose words encode their own address. Random burst
// lengths, addresses (including the wrap at the end of the buffer), IDs and
// random rready stalls. Checks every beat's data, rlast position and rid,
// the AXI stability rule (by the module's own assertion), and that with
// rready held high a 256-beat burst takes 256 + 2 clocks from the address
// handshake to its last beat (one beat per clock).
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_bram_ctrl;
  import ltl_pkg::*;
  localparam int unsigned MAW = $clog2(RING_DEPTH);
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic arvalid = 0, arready, rvalid, rready = 0, rlast, mem_re;
  logic [21:0] araddr = '0;
  logic [7:0] arlen = '0;
  logic [3:0] arid = '0, rid;
  logic [AXIS_W-1:0] rdata, mem_rdata;
  logic [1:0] rresp;
  logic [MAW-1:0] mem_raddr;
  bram_ctrl dut (.clk, .rst, .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_arlen(arlen), .s_arid(arid), .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata),
    .s_rlast(rlast), .s_rid(rid), .s_rresp(rresp), .mem_re, .mem_raddr, .mem_rdata);

  // memory model: word at address a = {a repeated}
  always @(posedge clk) if (mem_re) mem_rdata <= {32{32'(mem_raddr) ^ 32'h5A000000}};

  logic stall_rand = 1'b1;
  always @(posedge clk) rready <= stall_rand ? ($urandom_range(2) != 0) : 1'b1;

  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic burst(input int unsigned word_addr, input int unsigned len, input logic [3:0] id,
                       output int unsigned clocks);
    int unsigned t0, n;
    @(posedge clk);
    arvalid <= 1; araddr <= 22'(word_addr << 7); arlen <= 8'(len - 1); arid <= id;
    do @(posedge clk); while (!arready);
    t0 = cyc;
    arvalid <= 0;
    n = 0;
    while (n < len) begin
      @(posedge clk);
      if (rvalid && rready) begin
        automatic int unsigned a = (word_addr + n) % RING_DEPTH;
        checks++;
        if (rdata[31:0] !== (32'(a) ^ 32'h5A000000) || rlast !== (n == len - 1) || rid !== id || rresp !== 0) begin
          failures++; if (failures < 6) $display("beat %0d of burst at %0d wrong", n, word_addr);
        end
        n++;
      end
    end
    clocks = cyc - t0;
  endtask

  initial begin
    int unsigned c;
    repeat (3) @(posedge clk); rst <= 0;
    for (int b = 0; b < 40; b++)
      burst($urandom_range(RING_DEPTH - 1), $urandom_range(256, 1), 4'($urandom), c);
    burst(RING_DEPTH - 3, 8, 4'd7, c);          // wraps at the end
    stall_rand = 1'b0;
    repeat (3) @(posedge clk);
    burst(100, 256, 4'd2, c);
    checks++;
    if (c != 256 + 2) begin failures++; $display("256-beat burst took %0d clocks", c); end
    $display("256-beat burst: %0d clocks", c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
