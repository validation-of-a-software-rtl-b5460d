// pl_regs: AXI4-Lite control and status registers of the PL datapath, the
// interface through which software on the application processor sets up
// and runs an acquisition.
//
// Register map (32-bit registers, byte offsets):
//   0x00 CTRL        [0] mode (0 = US pulse-echo, 1 = OA external trigger)
//                    [1] trigger enable
//   0x04 START       write: software start (US mode fires the pulser)
//   0x08 TRIG_DELAY  [15:0] clocks from trigger to start of frame (reset 60)
//   0x0C FRAME_LEN   [19:0] samples per channel per frame (reset 3072)
//   0x10 BLOCK_LOG2  [3:0]  words per block = 2**n, 128 B words (reset 11 = 256 KB)
//   0x14 RELEASE     write: one block has been sent (frees it)
//   0x18 PULSE_LEN   [7:0]  pulser trigger width in clocks (reset 8)
//   0x20 STATUS      [0] JESD link up [1] JESD error [2] ring overflow
//                    [3] stream aligned [4] clock-crossing overflow
//   0x24 FRAME_CNT   frames started        0x28 BLOCK_CNT  blocks filled
//   0x2C LAST_BLOCK  byte address of the last filled block
//   0x30 LAST_LEN    byte length of the last filled block
//   0x34 TRIG_CNT    [15:0] accepted, [31:16] missed triggers
//   0x38 OCCUPIED    blocks written and not yet released
// Writes take effect the clock after the write handshake; AW and W are
// accepted together. Reads return the value one clock after AR. Unmapped
// addresses read as zero. The paper says that all acquisition parameters
// are set from software over AXI; the map itself is this design's choice,
// its reset values follow the paper's demonstration (60-clock delay, six
// 256 KB blocks per frame).
module pl_regs
  import ltl_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite slave
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // control outputs
  output acq_mode_e   mode,
  output logic        trig_enable,
  output logic        sw_start,
  output logic [15:0] trig_delay,
  output logic [19:0] frame_len,
  output logic [3:0]  block_log2,
  output logic        release_blk,
  output logic [7:0]  pulse_len,
  // status inputs
  input  logic [4:0]  status,
  input  logic [15:0] frame_cnt,
  input  logic [15:0] blk_cnt,
  input  logic [31:0] last_blk_addr,
  input  logic [31:0] last_blk_len,
  input  logic [15:0] trig_cnt,
  input  logic [15:0] missed_cnt,
  input  logic [15:0] occupied
);

  logic wr;
  assign wr        = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_bresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      mode        <= MODE_US;
      trig_enable <= 1'b0;
      sw_start    <= 1'b0;
      trig_delay  <= 16'd60;
      frame_len   <= 20'd3072;
      block_log2  <= 4'd11;
      release_blk <= 1'b0;
      pulse_len   <= 8'd8;
      s_bvalid    <= 1'b0;
      s_rvalid    <= 1'b0;
      s_rdata     <= '0;
    end else begin
      sw_start    <= 1'b0;
      release_blk <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[7:2])
          6'h00: begin mode <= acq_mode_e'(s_wdata[0]); trig_enable <= s_wdata[1]; end
          6'h01: sw_start    <= 1'b1;
          6'h02: trig_delay  <= s_wdata[15:0];
          6'h03: frame_len   <= s_wdata[19:0];
          6'h04: block_log2  <= s_wdata[3:0];
          6'h05: release_blk <= 1'b1;
          6'h06: pulse_len   <= s_wdata[7:0];
          default: ;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[7:2])
          6'h00: s_rdata <= {30'd0, trig_enable, mode};
          6'h02: s_rdata <= {16'd0, trig_delay};
          6'h03: s_rdata <= {12'd0, frame_len};
          6'h04: s_rdata <= {28'd0, block_log2};
          6'h06: s_rdata <= {24'd0, pulse_len};
          6'h08: s_rdata <= {27'd0, status};
          6'h09: s_rdata <= {16'd0, frame_cnt};
          6'h0A: s_rdata <= {16'd0, blk_cnt};
          6'h0B: s_rdata <= last_blk_addr;
          6'h0C: s_rdata <= last_blk_len;
          6'h0D: s_rdata <= {missed_cnt, trig_cnt};
          6'h0E: s_rdata <= {16'd0, occupied};
          default: s_rdata <= '0;
        endcase
      end
    end
  end

endmodule
