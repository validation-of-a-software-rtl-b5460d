// tb_cdc_fifo: checks the dual-clock FIFO with unrelated write and read
// clocks: every written word must come out once, in order, with random gaps
// on both sides; then the reader stops and the overflow flag must rise when
// more words than the depth are written.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_cdc_fifo;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #1.5625 wclk = ~wclk;
  always #1.41   rclk = ~rclk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en, empty, ovf;
  logic [64:0] wdata = '0, rdata;
  cdc_fifo #(.W(65), .DEPTH(16)) dut (.wr_clk(wclk), .wr_rst(wrst), .wr_en, .wr_data(wdata),
    .wr_overflow(ovf), .rd_clk(rclk), .rd_rst(rrst), .rd_en, .rd_data(rdata), .rd_empty(empty));

  int unsigned nwr = 0, nrd = 0;
  logic rd_allow = 1'b1;
  localparam int unsigned N = 2000;
  // reader idles one clock in eight: its average rate stays above the
  // writer's, as in the system (system clock at least the device clock)
  logic rd_go = 1'b1;
  always @(posedge rclk) rd_go <= ($urandom_range(7) != 0);
  assign rd_en = rd_allow && !empty && rd_go;

  logic phase2 = 1'b0;
  always @(posedge wclk) if (!wrst && !phase2) begin
    if (nwr < N && $urandom_range(4) != 0) begin
      wr_en <= 1'b1; wdata <= {nwr[0], 32'hA5000000 | nwr, nwr}; nwr <= nwr + 1;
    end else wr_en <= 1'b0;
  end
  always @(posedge rclk) if (!rrst && rd_en) begin
    checks++;
    if (rdata !== {nrd[0], 32'hA5000000 | nrd, nrd}) begin
      failures++; if (failures < 5) $display("word %0d: got %h", nrd, rdata);
    end
    nrd <= nrd + 1;
  end

  initial begin
    repeat (4) @(posedge wclk); wrst <= 0; rrst <= 0;
    wait (nrd == N);
    checks++; if (ovf) begin failures++; $display("overflow in normal run"); end
    // stop the reader and overfill
    rd_allow = 1'b0;
    phase2 = 1'b1;
    repeat (5) @(posedge wclk);
    for (int i = 0; i < 20; i++) begin
      @(posedge wclk); wr_en <= 1'b1; wdata <= 65'(i);
    end
    @(posedge wclk); wr_en <= 1'b0;
    @(posedge wclk);
    checks++; if (!ovf) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge wclk);
    failures++;
    $display("watchdog: written %0d read %0d", nwr, nrd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
