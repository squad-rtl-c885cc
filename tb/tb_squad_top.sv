// tb_squad_top: end-to-end test of the detection pipeline at reduced size.
//
// The testbench plays the processor and the detector. It loads a network
// whose first hidden neuron responds to the pulse height, so that tall
// pulses (dark-count-like, ~3850 ADC codes) come out as class 0 and lower
// ones (photon-like, ~3400) as class 1, programs the registers over the
// host bus, enables the laser trigger and then feeds an ADC stream that is
// uniform background noise plus one SNSPD-like pulse per trigger period.
// Every classified detection leaving the chip is compared with a reference
// computed from the stream itself (capture window, features, calibration
// against the same reference or the histogram mode, scaling, network,
// softmax). It runs in three phases - dark-count elimination, elimination
// off, feature mode with the histogram reference - and also sends a pulse
// during a capture (missed) and one outside the detection window (ignored).
// Each of those mechanisms must be seen at least once. Counters, the
// histogram and the captured samples are read back through the bus.
module tb_squad_top;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  // ---------------- sizes ----------------
  localparam int WIN = 64, PRE = 8, NBINS = 64, BIN_SHIFT = 7, PERIOD = 3000, PULSE_W = 4;
  localparam int H1 = 8, H2 = 6, H3 = 4;
  localparam int NPER = 24;
  localparam int TAU_MIN = 8, TAU_MAX = 20;
`include "squad_e2e_body.svh"

  squad_top #(.WIN(WIN), .PRE(PRE), .NBINS(NBINS), .BIN_SHIFT(BIN_SHIFT), .PERIOD(PERIOD),
              .PULSE_W(PULSE_W), .H1(H1), .H2(H2), .H3(H3)) dut (
    .clk, .rst_n, .adc_valid, .adc_data, .dac_trig, .det_window,
    .host_wr, .host_rd, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .det_valid, .det_cls, .det_score, .det_tstamp);
endmodule
