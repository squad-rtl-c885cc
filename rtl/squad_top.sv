// squad_top: smart single-photon detection pipeline.
//
// Digital part of a detection system in which an FPGA reads an SNSPD
// (superconducting nanowire single-photon detector) through a fast ADC,
// recognises each detection with a small neural network and removes dark
// counts in real time, while also firing the laser that produces the photons.
// Data flow, one ADC sample per clock:
//   trigger_gen      laser trigger (to the DAC), detection window, time tag
//   noise_filter     threshold crossing -> capture WIN samples into
//   event_buffer     the detection's samples (also readable by the host)
//   feature_extract  maximum, FWHM, rise and fall time
//   max_histogram    distribution of maxima, most probable value
//   calibrator       calibration factor against the reference basis
//   nn_input_prep    6-entry input vector, scaled to Q7.8
//   fcnn             6-128-64-32-2 network (sigmoid hidden layers)
//   softmax_decide   class and probability
//   dark_count_filter drop dark counts / pass labels, count
//   squad_csr        host registers, weight loading
// One detection is processed at a time: the filter holds its buffer until
// the class of that detection is known, and threshold crossings in the
// meantime are counted as missed. At the default sizes this dead time is
// WIN + about 11 100 cycles (NMAC = 11072), under 3 us at 4 GS/s, against
// the 100 us between laser pulses at the paper's 10 kHz.
// The ADC, DAC, processor and detector are outside: ADC samples enter on
// adc_valid/adc_data, the trigger leaves on dac_trig, the processor's
// register bus enters on the host_* ports, classified detections leave on
// det_*. The chain of blocks follows the paper's workflow; the single
// detection in flight and the bus are this design's choices.
module squad_top
  import squad_pkg::*;
#(
  parameter int unsigned WIN       = 512,
  parameter int unsigned PRE       = 16,
  parameter int unsigned NBINS     = 256,
  parameter int unsigned BIN_SHIFT = 5,
  parameter int unsigned PERIOD    = 400000,
  parameter int unsigned PULSE_W   = 16,
  parameter int unsigned H1        = 128,
  parameter int unsigned H2        = 64,
  parameter int unsigned H3        = 32,
  localparam int unsigned N_OUT    = 2,
  localparam int unsigned NW       = N_FEAT*H1 + H1*H2 + H2*H3 + H3*N_OUT,
  localparam int unsigned NB       = H1 + H2 + H3 + N_OUT
) (
  input  logic            clk,
  input  logic            rst_n,
  // RF ADC sample stream (SNSPD readout)
  input  logic            adc_valid,
  input  sample_t         adc_data,
  // laser trigger towards the RF DAC
  output logic            dac_trig,
  output logic            det_window,
  // host register bus
  input  logic            host_wr,
  input  logic            host_rd,
  input  logic [15:0]     host_addr,
  input  logic [31:0]     host_wdata,
  output logic [31:0]     host_rdata,
  output logic            host_rvalid,
  // classified detections
  output logic            det_valid,
  output logic            det_cls,
  output act_t            det_score,
  output logic [TS_W-1:0] det_tstamp
);

  localparam int unsigned EAW = $clog2(WIN);
  localparam int unsigned HBW = $clog2(NBINS);
  localparam int unsigned WAW = $clog2(NW);
  localparam int unsigned BAW = $clog2(NB);

  cfg_t    cfg;
  status_t status;
  logic    hist_clr, cnt_clr;

  // ---------------- trigger and window ----------------
  logic [TS_W-1:0] tstamp;

  trigger_gen #(.PERIOD(PERIOD), .PULSE_W(PULSE_W)) u_trig (
    .clk, .rst_n, .en(cfg.trig_en), .period(cfg.period), .pulse_w(cfg.pulse_w),
    .win_delay(cfg.win_delay), .win_len(cfg.win_len),
    .trig_out(dac_trig), .window(det_window), .tstamp);

  // ---------------- capture ----------------
  logic            buf_we;
  logic [EAW-1:0]  buf_waddr, fe_raddr, host_evaddr;
  sample_t         buf_wdata, fe_rdata, host_evdata;
  logic            ev_valid, flt_busy, missed, release_buf;
  event_info_t     ev_info;

  noise_filter #(.WIN(WIN), .PRE(PRE)) u_filter (
    .clk, .rst_n, .s_valid(adc_valid), .s_data(adc_data), .window(det_window),
    .tstamp, .threshold(cfg.threshold),
    .buf_we, .buf_waddr, .buf_wdata, .ev_valid, .ev_info,
    .release_buf, .busy(flt_busy), .missed);

  event_buffer #(.DEPTH(WIN)) u_evbuf (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(buf_wdata),
    .raddr_a(fe_raddr), .rdata_a(fe_rdata), .raddr_b(host_evaddr), .rdata_b(host_evdata));

  // ---------------- features, histogram, calibration ----------------
  logic      feat_valid, fe_busy;
  features_t feat;

  feature_extract #(.WIN(WIN)) u_feat (
    .clk, .rst_n, .start(ev_valid), .ev_info, .buf_raddr(fe_raddr), .buf_rdata(fe_rdata),
    .feat_valid, .feat, .busy(fe_busy));

  logic [HBW-1:0] hist_mode_bin, hist_rbin;
  logic [15:0]    hist_mode_count, hist_rcount;
  logic [31:0]    hist_total;
  sample_t        hist_ref;
  logic           hist_busy;

  max_histogram #(.NBINS(NBINS), .BIN_SHIFT(BIN_SHIFT), .CNT_BITS(16)) u_hist (
    .clk, .rst_n, .clear(hist_clr), .in_valid(feat_valid && cfg.hist_en), .in_value(feat.vmax),
    .mode_bin(hist_mode_bin), .mode_count(hist_mode_count), .total(hist_total),
    .ref_value(hist_ref), .busy(hist_busy), .rd_bin(hist_rbin), .rd_count(hist_rcount));

  logic      cal_valid;
  features_t cal_feat;
  sample_t   cal_factor;

  calibrator u_cal (
    .clk, .rst_n, .in_valid(feat_valid), .in_feat(feat),
    .ref_value(cfg.use_hist_ref ? hist_ref : cfg.cal_ref), .gain(cfg.cal_gain),
    .out_valid(cal_valid), .out_feat(cal_feat), .factor(cal_factor));

  // ---------------- classifier ----------------
  sample_t         norm_off [N_FEAT];
  sample_t         norm_gain [N_FEAT];
  logic            x_valid;
  act_t            x [N_FEAT];
  logic [TS_W-1:0] x_tstamp, nn_tstamp;

  always_comb begin
    for (int i = 0; i < N_FEAT; i++) begin
      norm_off[i]  = cfg.norm_off[i];
      norm_gain[i] = cfg.norm_gain[i];
    end
  end

  nn_input_prep u_prep (
    .clk, .rst_n, .in_valid(cal_valid), .in_feat(cal_feat), .factor(cal_factor),
    .bias_setting(cfg.bias_setting), .off(norm_off), .gain(norm_gain),
    .out_valid(x_valid), .x, .out_tstamp(x_tstamp));

  logic           w_we, b_we, nn_busy, nn_valid;
  logic [WAW-1:0] w_waddr;
  logic [BAW-1:0] b_waddr;
  act_t           w_wdata, b_wdata;
  act_t           z [N_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       nn_tstamp <= '0;
    else if (x_valid) nn_tstamp <= x_tstamp;
  end

  fcnn #(.N_IN(N_FEAT), .H1(H1), .H2(H2), .H3(H3), .N_OUT(N_OUT)) u_nn (
    .clk, .rst_n, .w_we, .w_waddr, .w_wdata, .b_we, .b_waddr, .b_wdata,
    .start(x_valid), .x, .busy(nn_busy), .out_valid(nn_valid), .z);

  logic            dec_valid, dec_cls;
  act_t            dec_score;
  logic [TS_W-1:0] dec_tstamp;

  softmax_decide u_dec (
    .clk, .rst_n, .in_valid(nn_valid), .z0(z[0]), .z1(z[1]), .in_tstamp(nn_tstamp),
    .out_valid(dec_valid), .cls(dec_cls), .score(dec_score), .out_tstamp(dec_tstamp));

  // the capture buffer is freed once its detection has been classified
  assign release_buf = dec_valid;

  // ---------------- feedback ----------------
  dark_count_filter u_fb (
    .clk, .rst_n, .mode(cfg.mode), .elim_en(cfg.elim_en), .cnt_clr,
    .in_valid(dec_valid), .in_cls(dec_cls), .in_score(dec_score), .in_tstamp(dec_tstamp),
    .missed,
    .out_valid(det_valid), .out_cls(det_cls), .out_score(det_score), .out_tstamp(det_tstamp),
    .cnt_cls1(status.cnt_cls1), .cnt_cls0(status.cnt_cls0),
    .cnt_removed(status.cnt_removed), .cnt_missed(status.cnt_missed));

  // ---------------- host interface ----------------
  assign status.hist_mode_bin   = 16'(hist_mode_bin);
  assign status.hist_mode_count = hist_mode_count;
  assign status.hist_total      = hist_total;
  assign status.busy            = flt_busy || fe_busy || nn_busy;
  assign status.hist_busy       = hist_busy;

  squad_csr #(.WIN(WIN), .NBINS(NBINS), .NW(NW), .NB(NB)) u_csr (
    .clk, .rst_n, .wr_en(host_wr), .rd_en(host_rd), .addr(host_addr), .wr_data(host_wdata),
    .rd_data(host_rdata), .rd_valid(host_rvalid), .cfg, .hist_clr, .cnt_clr, .status,
    .evbuf_raddr(host_evaddr), .evbuf_rdata(host_evdata),
    .hist_rbin, .hist_rcount,
    .w_we, .w_waddr, .w_wdata, .b_we, .b_waddr, .b_wdata);

endmodule
