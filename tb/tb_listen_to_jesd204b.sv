// tb_listen_to_jesd204b: self-checking test of the JESD204B receive core.
//
// Two receivers run side by side against the behavioural AFE transmitter:
//   A: scrambling on, octet offset 1, lane 1 skewed by 3 words
//   B: scrambling off, octet offset 3, slowly varying samples so that the
//      transmitter replaces repeated frame-end octets by /F/ and /A/.
// After the link comes up every output word is compared with the sample
// values the transmitter encoded, the multiframe marker must recur every 64
// words, and the stream must deliver one word per clock (4 x sample rate).
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_listen_to_jesd204b;
  import ltl_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #1.5625 clk = ~clk;   // 320 MHz

  int checks = 0, failures = 0;

  function automatic logic [15:0] sample(int unsigned afe, int unsigned ch, int unsigned fn, int unsigned slow);
    return {4'(afe), 4'(ch), 8'(fn >> slow)};
  endfunction

  lane_word_t txa [LANES_PER_AFE], txb [LANES_PER_AFE];
  logic [3:0] noerr [LANES_PER_AFE];
  assign noerr[0] = '0;
  assign noerr[1] = '0;
  logic sync_a, sync_b, va, vb, up_a, up_b, ea, eb;
  logic [63:0] da, db;
  logic [1:0]  ua, ub;

  afe_jesd_tx_model #(.AFE_ID(3), .LID0(0), .SCR(1'b1), .SLOW(0), .OCTET_OFS(1), .SKEW1(3))
    u_txa (.clk, .rst, .sync_n(sync_a), .tx(txa));
  afe_jesd_tx_model #(.AFE_ID(5), .LID0(0), .SCR(1'b0), .SLOW(2), .OCTET_OFS(3), .SKEW1(0))
    u_txb (.clk, .rst, .sync_n(sync_b), .tx(txb));

  listen_to_jesd204b u_a (.clk, .rst, .rx(txa), .rx_dec_err(noerr), .sync_n(sync_a),
    .m_tdata(da), .m_tvalid(va), .m_tuser(ua), .link_up(up_a), .ilas_err(ea));
  listen_to_jesd204b u_b (.clk, .rst, .rx(txb), .rx_dec_err(noerr), .sync_n(sync_b),
    .m_tdata(db), .m_tvalid(vb), .m_tuser(ub), .link_up(up_b), .ilas_err(eb));

  int unsigned wa = 0, wb = 0;    // output word counters
  int unsigned gap_a = 0, gap_b = 0, k_repl = 0;
  localparam int unsigned N_WORDS = 3000;

  task automatic check_word(input logic [63:0] d, input logic [1:0] u, input int unsigned w,
                            input int unsigned afe, input int unsigned slow, input string tag);
    int unsigned fn, fw;
    logic [63:0] exp;
    fn = w / WORDS_PER_FRAME;
    fw = w % WORDS_PER_FRAME;
    exp = {sample(afe, 8 + 2*fw + 1, fn, slow), sample(afe, 8 + 2*fw, fn, slow),
           sample(afe, 2*fw + 1, fn, slow),     sample(afe, 2*fw, fn, slow)};
    checks++;
    if (d !== exp) begin
      failures++;
      if (failures < 10) $display("%s word %0d: got %h exp %h", tag, w, d, exp);
    end
    checks++;
    if (u[0] !== (w % WORDS_PER_MF == 0) || u[1] !== 1'b0) begin
      failures++;
      if (failures < 10) $display("%s word %0d: tuser %b", tag, w, u);
    end
  endtask

  always @(posedge clk) begin
    if (!rst) begin
      if (va && wa < N_WORDS) begin check_word(da, ua, wa, 3, 0, "A"); wa <= wa + 1; end
      else if (wa > 0 && wa < N_WORDS) gap_a <= gap_a + 1;
      if (vb && wb < N_WORDS) begin check_word(db, ub, wb, 5, 2, "B"); wb <= wb + 1; end
      else if (wb > 0 && wb < N_WORDS) gap_b <= gap_b + 1;
      for (int l = 0; l < 2; l++)
        for (int o = 0; o < 4; o++)
          if (txb[l].charisk[o] && (txb[l].data[8*o +: 8] == K_F) && sync_b && up_b) k_repl <= k_repl + 1;
    end
  end

  initial begin
    repeat (10) @(posedge clk);
    rst <= 1'b0;
    wait (wa == N_WORDS && wb == N_WORDS);
    @(posedge clk);
    checks++;
    if (gap_a != 0 || gap_b != 0) begin failures++; $display("gaps in output stream %0d %0d", gap_a, gap_b); end
    checks++;
    if (k_repl == 0) begin failures++; $display("character replacement never exercised"); end
    checks++;
    if (ea || eb) begin failures++; $display("error flag set"); end
    $display("frame-end replacements seen on link B: %0d", k_repl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: link A words %0d, link B words %0d", wa, wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
