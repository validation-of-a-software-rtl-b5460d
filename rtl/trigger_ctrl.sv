// trigger_ctrl: the acquisition trigger of the PL.
//
// Two sources, chosen by the acquisition mode:
//   MODE_OA: the external optoacoustic (laser) trigger input, passed through
//            a two-flop synchroniser and edge-detected in the system clock;
//   MODE_US: a software start command, which also drives the pulser trigger
//            output for pulse_len clocks so that the pulser fires and the
//            acquisition window is timed from the same clock edge.
// An accepted trigger loads a programmable delay counter; when it expires,
// win_start pulses for one clock to open the frame window. Triggers that
// arrive while a delay is running are ignored and counted as missed.
// Following the paper: the two sources, the programmable delay and the
// capture of the asynchronous trigger by a clock. This design's choices: the
// capture clock is the system clock (a faster clock than the 80 MHz sampling
// clock the paper uses, so the capture uncertainty is below 12.5 ns), the
// pulse width, the missed-trigger counter and enable.
module trigger_ctrl
  import ltl_pkg::*;
#(
  parameter int unsigned DELAY_W = 16
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,
  input  acq_mode_e          mode,
  input  logic               sw_start,      // one-clock pulse from software
  input  logic               oa_trig_i,     // asynchronous external trigger
  input  logic [DELAY_W-1:0] delay,         // clocks from trigger to window
  input  logic [7:0]         pulse_len,     // pulser trigger width in clocks
  output logic               pulser_trig_o,
  output logic               win_start,
  output logic [15:0]        trig_cnt,
  output logic [15:0]        missed_cnt
);

  logic [2:0]         sync_q;          // two synchroniser flops + edge history
  logic               oa_rise, event_d;
  logic               busy_q;
  logic [DELAY_W-1:0] dcnt_q;
  logic [7:0]         pcnt_q;

  assign oa_rise = sync_q[1] && !sync_q[2];
  assign event_d = enable && (mode == MODE_OA ? oa_rise : sw_start);

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q        <= '0;
      busy_q        <= 1'b0;
      dcnt_q        <= '0;
      pcnt_q        <= '0;
      pulser_trig_o <= 1'b0;
      win_start     <= 1'b0;
      trig_cnt      <= '0;
      missed_cnt    <= '0;
    end else begin
      sync_q    <= {sync_q[1:0], oa_trig_i};
      win_start <= 1'b0;

      // pulser trigger pulse
      if (pcnt_q != 0) pcnt_q <= pcnt_q - 8'd1;
      pulser_trig_o <= (pcnt_q != 0);

      if (event_d && busy_q) begin
        missed_cnt <= missed_cnt + 16'd1;
      end else if (event_d) begin
        trig_cnt <= trig_cnt + 16'd1;
        busy_q   <= 1'b1;
        dcnt_q   <= delay;
        if (mode == MODE_US) pcnt_q <= pulse_len;
      end else if (busy_q) begin
        if (dcnt_q == 0) begin
          busy_q    <= 1'b0;
          win_start <= 1'b1;
        end else begin
          dcnt_q <= dcnt_q - 1'b1;
        end
      end
    end
  end

endmodule
