// bram_ctrl: AXI4 memory-mapped read port of the ring buffer, through which
// the RDMA engine (ERNIC) fetches the payload of each RDMA WRITE.
//
// Read-only AXI4 slave with INCR bursts of full-width (1024-bit) beats. One
// burst is served at a time: the address is taken at the AR handshake, then
// the controller issues one memory read per beat into a two-entry output
// queue (the memory has one clock of read latency), so with rready held high
// a burst streams one beat per clock after a two-clock start. Addresses are
// byte addresses; the low 7 bits are ignored (beats are 128-byte aligned)
// and the word address wraps at the end of the buffer. rresp is always OKAY.
// The write channels are not provided: in this system the buffer is only
// written by the block generator. Following the paper: an AXI4 memory-mapped
// read of the buffer by the ERNIC. This design's choices: everything else
// (it stands in for the vendor's BRAM controller).
module bram_ctrl
  import ltl_pkg::*;
#(
  parameter int unsigned DATA_W = AXIS_W,
  parameter int unsigned ADDR_W = $clog2(RING_BYTES),   // byte address bits
  parameter int unsigned ID_W   = 4,
  parameter int unsigned MEM_AW = ADDR_W - $clog2(AXIS_W / 8)
) (
  input  logic              clk,
  input  logic              rst,
  // AXI4 read address channel
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic [7:0]        s_arlen,
  input  logic [ID_W-1:0]   s_arid,
  // AXI4 read data channel
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [DATA_W-1:0] s_rdata,
  output logic              s_rlast,
  output logic [ID_W-1:0]   s_rid,
  output logic [1:0]        s_rresp,
  // memory read port
  output logic              mem_re,
  output logic [MEM_AW-1:0] mem_raddr,
  input  logic [DATA_W-1:0] mem_rdata
);
  localparam int unsigned LSB = ADDR_W - MEM_AW;

  logic              busy_q;
  logic [MEM_AW-1:0] addr_q;
  logic [8:0]        to_issue_q;   // beats not yet read from memory
  logic [ID_W-1:0]   id_q;
  logic              infl_q, infl_last_q;

  // two-entry output queue
  logic [DATA_W-1:0] qd [2];
  logic [1:0]        ql;
  logic [1:0]        qcnt_q;
  logic              pop, push, last_issue;

  assign s_arready = !busy_q;
  assign pop       = s_rvalid && s_rready;
  assign push      = infl_q;
  assign mem_re    = busy_q && to_issue_q != 0 &&
                     (32'(qcnt_q) - 32'(pop) + 32'(infl_q) < 2);
  assign mem_raddr = addr_q;
  assign last_issue = (to_issue_q == 9'd1);

  assign s_rvalid = (qcnt_q != 0);
  assign s_rdata  = qd[0];
  assign s_rlast  = ql[0];
  assign s_rid    = id_q;
  assign s_rresp  = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy_q      <= 1'b0;
      addr_q      <= '0;
      to_issue_q  <= '0;
      id_q        <= '0;
      infl_q      <= 1'b0;
      infl_last_q <= 1'b0;
      qcnt_q      <= '0;
      ql          <= '0;
      qd[0]       <= '0;
      qd[1]       <= '0;
    end else begin
      if (s_arvalid && s_arready) begin
        busy_q     <= 1'b1;
        addr_q     <= s_araddr[ADDR_W-1:LSB];
        to_issue_q <= {1'b0, s_arlen} + 9'd1;
        id_q       <= s_arid;
      end
      infl_q      <= mem_re;
      infl_last_q <= mem_re && last_issue;
      if (mem_re) begin
        addr_q     <= addr_q + 1'b1;
        to_issue_q <= to_issue_q - 9'd1;
      end
      // queue: pop from entry 0, push behind the remaining entries
      unique case ({push, pop})
        2'b10: begin
          qd[qcnt_q[0]] <= mem_rdata;
          ql[qcnt_q[0]] <= infl_last_q;
          qcnt_q <= qcnt_q + 2'd1;
        end
        2'b01: begin
          qd[0] <= qd[1]; ql[0] <= ql[1];
          qcnt_q <= qcnt_q - 2'd1;
        end
        2'b11: begin
          if (qcnt_q == 2'd1) begin
            qd[0] <= mem_rdata; ql[0] <= infl_last_q;
          end else begin
            qd[0] <= qd[1]; ql[0] <= ql[1];
            qd[1] <= mem_rdata; ql[1] <= infl_last_q;
          end
        end
        default: ;
      endcase
      if (pop && s_rlast) busy_q <= 1'b0;
    end
  end

  // AXI rule: data and last stay stable while valid is waiting for ready
  a_r_stable: assert property (@(posedge clk) disable iff (rst)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata) && $stable(s_rlast))
    else $error("bram_ctrl: R channel changed while stalled");

endmodule
