// tb_squad_full: the end-to-end test of tb_squad_top with the pipeline at
// its default sizes: 512-sample capture window, 256-bin histogram, the
// 6-128-64-32-2 network and a trigger period of 400000 samples (10 kHz at
// 4 GS/s). Fifteen trigger periods (6 million samples) are streamed: five with
// dark-count elimination, five with elimination off, five in feature mode
// with the histogram reference; one extra pulse arrives during a capture
// and one outside the detection window. See tb_squad_top for the checks.
module tb_squad_full;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  // the defaults of squad_top
  localparam int WIN = 512, PRE = 16, NBINS = 256, BIN_SHIFT = 5, PERIOD = 400000, PULSE_W = 16;
  localparam int H1 = 128, H2 = 64, H3 = 32;
  localparam int NPER = 15;
  localparam int TAU_MIN = 40, TAU_MAX = 100;
`include "squad_e2e_body.svh"

  squad_top dut (
    .clk, .rst_n, .adc_valid, .adc_data, .dac_trig, .det_window,
    .host_wr, .host_rd, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .det_valid, .det_cls, .det_score, .det_tstamp);
endmodule
