// ernic_reader_model: behavioural stand-in for the RDMA engine's read side.
// It accepts RDMA WRITE work requests (buffer byte address and length),
// fetches each payload from the ring buffer through AXI4 INCR bursts of up
// to 256 beats, and hands every fetched 1024-bit beat to the testbench as
// if it had been written into host memory. DUTY_PCT sets the share of clocks
// in which it accepts data, which models an outgoing link slower than the
// incoming sample stream (about 95.6 / 327.7 = 29 % at full channel count).
// wr_done pulses when the last beat of a work request has arrived.
//
// Behavioural model of the RDMA engine's buffer reads. The 95.6 Gb/s read
// rate follows the paper; the burst length and the stall pattern are this
// design's choices.
module ernic_reader_model #(
  parameter int unsigned DUTY_PCT = 29
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_valid,
  input  logic [21:0]   wr_addr,     // byte address in the ring buffer
  input  logic [22:0]   wr_bytes,
  output logic          m_arvalid,
  input  logic          m_arready,
  output logic [21:0]   m_araddr,
  output logic [7:0]    m_arlen,
  output logic [3:0]    m_arid,
  input  logic          m_rvalid,
  output logic          m_rready,
  input  logic [1023:0] m_rdata,
  input  logic          m_rlast,
  output logic          host_valid,
  output logic [1023:0] host_data,
  output logic          wr_done,
  output int unsigned   stall_cycles
);
  int unsigned q_addr [$], q_beats [$];
  int unsigned cur_addr = 0, left = 0, burst_left = 0;
  logic busy = 1'b0, in_burst = 1'b0;

  always @(posedge clk) begin
    if (rst) begin
      m_arvalid <= 0; m_rready <= 0; host_valid <= 0; wr_done <= 0; busy = 0; in_burst = 0;
      stall_cycles <= 0; m_araddr <= '0; m_arlen <= '0; m_arid <= '0;
    end else begin
      host_valid <= 0;
      wr_done    <= 0;
      if (wr_valid) begin q_addr.push_back(wr_addr); q_beats.push_back(wr_bytes / 128); end
      if (!busy && q_addr.size() != 0) begin
        cur_addr = q_addr.pop_front(); left = q_beats.pop_front(); busy = 1;
      end
      // address phase
      if (m_arvalid && m_arready) m_arvalid <= 0;
      else if (busy && !in_burst && !m_arvalid) begin
        burst_left = (left > 256) ? 256 : left;
        m_arvalid <= 1; m_araddr <= 22'(cur_addr); m_arlen <= 8'(burst_left - 1);
        m_arid <= 4'(m_arid + 1);
        in_burst = 1;
      end
      // data phase
      if (m_rvalid && m_rready) begin
        host_valid <= 1; host_data <= m_rdata;
        burst_left--; left--;
        cur_addr = (cur_addr + 128) % (4 * 1024 * 1024);
        if (m_rlast != (burst_left == 0)) $error("ernic model: rlast mismatch");
        if (burst_left == 0) begin
          in_burst = 0;
          if (left == 0) begin busy = 0; wr_done <= 1; end
        end
      end
      if (m_rvalid && !m_rready) stall_cycles <= stall_cycles + 1;
      m_rready <= ($urandom_range(99) < DUTY_PCT);
    end
  end
endmodule
