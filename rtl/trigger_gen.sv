// trigger_gen: laser trigger and detection-window timing.
//
// A free-running counter of sample periods restarts every `period` cycles.
// Cycle 0 of each period starts a trigger pulse of `pulse_w` cycles, which
// goes to the RF DAC and fires the laser. The same counter is the time tag
// of a detection (samples since the last trigger), and a detection window is
// open while win_delay <= tstamp < win_delay + win_len, so that only
// detections arriving in the expected emission interval are processed.
//
// The paper states that a DAC trigger starts each photon pulse and that the
// FPGA controls the detection time around the emission time, with photons
// sent at 10 kHz; the default period of 400000 samples is 10 kHz at the
// 4 GS/s ADC rate. Pulse width, window registers and the counter form are
// this design's choices. One clock cycle = one ADC sample period.
// Timing: trig_out, window and tstamp are registered; en=0 holds the counter
// at 0 and keeps trig_out and window low.
module trigger_gen
  import squad_pkg::*;
#(
  parameter int unsigned PERIOD  = 400000,
  parameter int unsigned PULSE_W = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [TS_W-1:0] period,     // 0 selects PERIOD
  input  logic [TS_W-1:0] pulse_w,    // 0 selects PULSE_W
  input  logic [TS_W-1:0] win_delay,
  input  logic [TS_W-1:0] win_len,
  output logic            trig_out,
  output logic            window,
  output logic [TS_W-1:0] tstamp
);

  logic [TS_W-1:0] per_eff, pw_eff, cnt;

  assign per_eff = (period  == '0) ? TS_W'(PERIOD)  : period;
  assign pw_eff  = (pulse_w == '0) ? TS_W'(PULSE_W) : pulse_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= '0;
      trig_out     <= 1'b0;
      window       <= 1'b0;
      tstamp       <= '0;
    end else if (!en) begin
      cnt          <= '0;
      trig_out     <= 1'b0;
      window       <= 1'b0;
      tstamp       <= '0;
    end else begin
      cnt          <= (cnt >= per_eff - 1) ? '0 : cnt + 1'b1;
      tstamp       <= cnt;
      trig_out     <= (cnt < pw_eff);
      window       <= (cnt >= win_delay) && ((cnt - win_delay) < win_len);
    end
  end

endmodule
