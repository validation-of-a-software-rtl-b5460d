// tb_trigger_ctrl: US mode: a software start must raise the pulser trigger
// for pulse_len clocks and open the window exactly delay+1 clocks after the
// start pulse. OA mode: an asynchronous external edge must open the window
// within delay + 4 clocks (synchroniser) and must not fire the pulser. A
// second trigger during the delay is counted as missed; disabled triggers
// are ignored. Also runs the paper's 60-clock delay.
//
// The checks and the stimulus are this design's own; the expected values
// follow from the behaviour described above, worked out in the testbench.
module tb_trigger_ctrl;
  import ltl_pkg::*;
  logic clk = 0, rst = 1;
  always #1.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en = 0, sw = 0, oa = 0;
  acq_mode_e mode = MODE_US;
  logic [15:0] delay = 16'd60;
  logic [7:0] plen = 8'd8;
  logic ptrig, wstart;
  logic [15:0] tcnt, mcnt;
  trigger_ctrl dut (.clk, .rst, .enable(en), .mode, .sw_start(sw), .oa_trig_i(oa), .delay,
    .pulse_len(plen), .pulser_trig_o(ptrig), .win_start(wstart), .trig_cnt(tcnt), .missed_cnt(mcnt));

  int unsigned cyc = 0, t_win = 0, n_win = 0, p_hi = 0, p_first = 0;
  always @(posedge clk) if (!rst) begin
    cyc <= cyc + 1;
    if (wstart) begin t_win = cyc; n_win++; end
    if (ptrig) begin if (p_hi == 0) p_first = cyc; p_hi++; end
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int unsigned t0;
    repeat (3) @(posedge clk); rst <= 0; en <= 1;
    // US mode, delay 60
    @(posedge clk); sw <= 1; t0 = cyc; @(posedge clk); sw <= 0;
    repeat (80) @(posedge clk);
    chk(n_win == 1, "one window in US mode");
    chk(t_win - p_first == 60, $sformatf("US window at %0d, pulser at %0d", t_win, p_first));
    chk(p_hi == 8, $sformatf("pulser pulse width %0d", p_hi));
    chk(p_first >= t0 && p_first <= t0 + 3, $sformatf("pulser rise at %0d start %0d", p_first, t0));
    // second start during delay is missed
    delay <= 16'd20;
    @(posedge clk); sw <= 1; @(posedge clk); sw <= 0;
    repeat (5) @(posedge clk); sw <= 1; @(posedge clk); sw <= 0;
    repeat (40) @(posedge clk);
    chk(n_win == 2 && mcnt == 1 && tcnt == 2, $sformatf("missed trigger: win %0d missed %0d acc %0d", n_win, mcnt, tcnt));
    // OA mode: asynchronous edge, no pulser
    mode <= MODE_OA; p_hi = 0; delay <= 16'd10;
    repeat (3) @(posedge clk);
    #0.7 oa = 1; t0 = cyc;
    repeat (30) @(posedge clk);
    chk(n_win == 3, "window in OA mode");
    chk(t_win >= t0 + 10 + 2 && t_win <= t0 + 10 + 5, $sformatf("OA window at %0d edge near %0d", t_win, t0));
    chk(p_hi == 0, "no pulser trigger in OA mode");
    // software start ignored in OA mode, edge ignored when disabled
    @(posedge clk); sw <= 1; @(posedge clk); sw <= 0;
    oa = 0; en <= 0; repeat (3) @(posedge clk); oa = 1;
    repeat (30) @(posedge clk);
    chk(n_win == 3, "no window from ignored triggers");
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
