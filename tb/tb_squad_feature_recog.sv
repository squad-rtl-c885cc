// tb_squad_feature_recog: photon feature recognition (wavelength and
// polarisation) in feature mode, with the network reloaded between tasks.
//
// Beside the photon/dark-count decision, the same pipeline recognises a
// property of each photon. Each property needs its own binary classifier,
// loaded by the processor before the measurement. This testbench runs two
// such measurements back to back:
//   1. "wavelength": the two classes differ in the pulse's decay time
//      (short against long tail). The network keys on the fall-time input.
//   2. "polarisation": the two classes differ in the rise time. The network
//      keys on the rise-time input.
// How a photon property shows in the pulse shape is a modelling assumption
// of this testbench. Amplitudes are drawn from the same range for both
// classes, so the height alone cannot separate them.
//
// In each measurement the processor:
//   - loads the weights;
//   - clears the counters;
//   - selects feature mode (every detection passes, labelled).
// The ADC then sees NPER laser periods with one pulse of a random class at a
// random time in the detection window.
//
// Checks:
//   - every output (class, probability, time tag) matches the bit-true
//     reference;
//   - the class of every output matches the true class (100 % accuracy);
//   - the class counters match.
// The sizes are reduced (64-sample window, 8-6-4 network).
module tb_squad_feature_recog;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  localparam int WIN = 64, PRE = 8, NBINS = 64, BIN_SHIFT = 7, PERIOD = 2000, PULSE_W = 4;
  localparam int H1 = 8, H2 = 6, H3 = 4;
  localparam int NPER = 100;
  localparam int THR = 1500, WIN_DELAY = 40, WIN_LEN = 1400;
  localparam int NW = N_FEAT*H1 + H1*H2 + H2*H3 + H3*2;
  localparam int NB = H1 + H2 + H3 + 2;
  localparam int NSAMP = NPER * PERIOD;

  logic clk = 0, rst_n = 0;
  logic adc_valid;
  sample_t adc_data;
  logic dac_trig, det_window;
  logic host_wr, host_rd, host_rvalid;
  logic [15:0] host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic det_valid, det_cls;
  act_t det_score;
  logic [31:0] det_tstamp;

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int stream [];
  int w [], b [], sizes [];
  int norm_gain [N_FEAT];
  int norm_off  [N_FEAT];

  typedef struct { int cls; int truth; int score; int tstamp; } exp_t;
  exp_t expq [$];
  int e_cls1, e_cls0, got, correct;

  squad_top #(.WIN(WIN), .PRE(PRE), .NBINS(NBINS), .BIN_SHIFT(BIN_SHIFT), .PERIOD(PERIOD),
              .PULSE_W(PULSE_W), .H1(H1), .H2(H2), .H3(H3)) dut (
    .clk, .rst_n, .adc_valid, .adc_data, .dac_trig, .det_window,
    .host_wr, .host_rd, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .det_valid, .det_cls, .det_score, .det_tstamp);

  initial begin
    repeat (2 * NSAMP + 4 * (NW + NB) + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [15:0] a, input int d);
    @(negedge clk); host_wr = 1; host_addr = a; host_wdata = 32'(d);
    @(negedge clk); host_wr = 0;
  endtask
  task automatic rd(input logic [15:0] a, output int d);
    @(negedge clk); host_rd = 1; host_addr = a;
    @(negedge clk); host_rd = 0;
    d = int'(host_rdata);
  endtask

  function automatic int crossing_after(input int k0);
    for (int k = k0; k < NSAMP; k++) if (stream[k] >= THR && stream[k-1] < THR) return k;
    return -1;
  endfunction

  task automatic add_pulse(input int k0, input int amp, input int rise, input int tau);
    for (int k = 0; k < 6 * tau + rise && k0 + k < NSAMP; k++)
      stream[k0 + k] = pulse_at(k, amp, rise, real'(tau), 300) + int'($urandom_range(0, 40));
  endtask

  // network whose hidden neuron 0 follows input `sel`; class 1 when that
  // input is below its offset
  task automatic make_net(input int sel);
    int wp, bp;
    w = new[NW]; b = new[NB];
    wp = 0; bp = 0;
    for (int l = 0; l < 4; l++) begin
      for (int o = 0; o < sizes[l+1]; o++) begin
        for (int i = 0; i < sizes[l]; i++) begin
          w[wp] = int'($urandom_range(0, 16)) - 8;
          if (o == 0 && i == ((l == 0) ? sel : 0)) w[wp] = (l == 0) ? 768 : ((l == 3) ? 1024 : 1280);
          if (l == 3 && o == 1 && i == 0) w[wp] = -1024;
          wp++;
        end
        b[bp] = int'($urandom_range(0, 16)) - 8;
        if (o == 0 && l > 0 && l < 3) b[bp] = -640;
        if (l == 3) b[bp] = (o == 0) ? -512 : 512;
        bp++;
      end
    end
  endtask

  task automatic predict(input int c, input int truth);
    int cap [], x [], z [];
    feat_ref_t f;
    int fac, raw [N_FEAT];
    exp_t e;
    cap = new[WIN];
    for (int i = 0; i < WIN; i++) cap[i] = stream[c - PRE + i];
    f = feat_ref(cap, THR, PRE);
    fac = sat16(longint'(f.vmax - 3400));
    raw = '{f.vmax, f.fwhm, f.rise, f.fall, fac, 70};
    x = new[N_FEAT];
    foreach (x[i]) x[i] = sat16(longint'(raw[i] - norm_off[i]) * longint'(norm_gain[i]));
    nn_ref(x, w, b, sizes, z);
    e.cls   = (z[1] > z[0]) ? 1 : 0;
    e.score = sig_ref(sat16(longint'(z[1]) - longint'(z[0])));
    e.truth = truth;
    e.tstamp = c % PERIOD;
    if (e.cls == 1) e_cls1++; else e_cls0++;
    expq.push_back(e);
  endtask

  always @(negedge clk) if (det_valid) begin
    exp_t e;
    got++;
    checks += 2;
    if (expq.size() == 0) begin
      failures += 2; $display("unexpected detection t=%0d", det_tstamp);
    end else begin
      e = expq.pop_front();
      if (int'(det_cls) !== e.cls || int'(det_score) !== e.score || int'(det_tstamp) !== e.tstamp) begin
        failures++;
        $display("got cls=%0d score=%0d t=%0d, expected cls=%0d score=%0d t=%0d",
                 det_cls, det_score, det_tstamp, e.cls, e.score, e.tstamp);
      end
      if (int'(det_cls) === e.truth) correct++;
      else begin failures++; $display("t=%0d: class %0d, true class %0d", det_tstamp, det_cls, e.truth); end
    end
  end

  // one measurement: task 0 = wavelength (decay time), 1 = polarisation (rise time)
  task automatic measure(input int task_id);
    int d, ev_t [NPER], ev_c [NPER];
    string name;
    name = (task_id == 0) ? "wavelength" : "polarisation";
    e_cls1 = 0; e_cls0 = 0; got = 0; correct = 0;
    foreach (norm_off[i]) begin norm_off[i] = 0; norm_gain[i] = 1; end
    norm_off[0] = 3600;
    if (task_id == 0) begin norm_off[3] = 12; norm_gain[3] = 64;  make_net(3); end
    else              begin norm_off[2] = 3;  norm_gain[2] = 128; make_net(2); end

    stream = new[NSAMP];
    foreach (stream[i]) stream[i] = $urandom_range(0, 1200);
    for (int p = 0; p < NPER; p++) begin
      int amp, rise, tau;
      ev_c[p] = $urandom_range(0, 1);
      ev_t[p] = $urandom_range(WIN_DELAY + PRE, WIN_DELAY + WIN_LEN - 200);
      amp = $urandom_range(3200, 3900);
      if (task_id == 0) begin
        rise = $urandom_range(2, 6);
        tau  = ev_c[p] ? int'($urandom_range(7, 9)) : int'($urandom_range(17, 20));
      end else begin
        rise = ev_c[p] ? int'($urandom_range(2, 3)) : int'($urandom_range(9, 12));
        tau  = $urandom_range(10, 14);
      end
      add_pulse(p * PERIOD + ev_t[p], amp, rise, tau);
    end
    for (int p = 0; p < NPER; p++) predict(crossing_after(p * PERIOD + ev_t[p]), ev_c[p]);

    // load the classifier and set feature mode, with the trigger stopped
    wr(REG_CTRL, 32'h00);
    for (int i = 0; i < NW; i++) wr(WEIGHT0 + 16'(i), w[i]);
    for (int i = 0; i < NB; i++) wr(BIAS0 + 16'(i), b[i]);
    for (int i = 0; i < N_FEAT; i++) begin
      wr(REG_NORM_OFF0 + 16'(i), norm_off[i]);
      wr(REG_NORM_GAIN0 + 16'(i), norm_gain[i]);
    end
    wr(REG_CTRL, 32'h40);   // clear the counters
    wr(REG_CTRL, 32'h05);   // trigger on, feature mode

    do @(negedge clk); while (!dac_trig);
    for (int k = 0; k < NSAMP; k++) begin
      adc_valid = 1; adc_data = sample_t'(stream[k]);
      @(negedge clk);
    end
    adc_valid = 0;
    repeat (400) @(negedge clk);

    checks++;
    if (expq.size() !== 0) begin failures++; $display("%0d detections missing", expq.size()); expq.delete(); end
    rd(REG_PHOTONS, d); checks++; if (d !== e_cls1) begin failures++; $display("class-1 count %0d exp %0d", d, e_cls1); end
    rd(REG_DARKS, d);   checks++; if (d !== e_cls0) begin failures++; $display("class-0 count %0d exp %0d", d, e_cls0); end
    rd(REG_MISSED, d);  checks++; if (d !== 0)      begin failures++; $display("missed %0d", d); end
    $display("%s recognition: %0d detections, class 1: %0d, class 0: %0d, correct: %0d (%0d %%)",
             name, got, e_cls1, e_cls0, correct, got ? 100 * correct / got : 0);
    checks += 3;
    if (got !== NPER) begin failures++; $display("%0d detections, expected %0d", got, NPER); end
    if (e_cls1 == 0)  begin failures++; $display("class 1 never seen"); end
    if (e_cls0 == 0)  begin failures++; $display("class 0 never seen"); end
  endtask

  initial begin
    host_wr = 0; host_rd = 0; host_addr = 0; host_wdata = 0;
    adc_valid = 0; adc_data = 0;
    sizes = '{N_FEAT, H1, H2, H3, 2};
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (NBINS + 4) @(negedge clk);
    wr(REG_WIN_DELAY, WIN_DELAY);
    wr(REG_WIN_LEN, WIN_LEN);
    measure(0);
    measure(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
