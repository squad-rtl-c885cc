// tb_squad_pl_decay: photoluminescence-decay measurement with and without
// real-time dark-count elimination.
//
// This is the emitter experiment the pipeline was built for. Each laser
// trigger excites an emitter. With some probability it emits one photon after
// an exponentially distributed delay (time constant TAU_EM samples). Dark
// counts arrive at uniformly random times. The detector output is modelled
// as background noise plus one pulse per event: photon pulses peak near
// 3400 ADC codes and dark-count pulses near 3850. The dark-count rate is
// exaggerated so that the background is visible in a short run.
//
// The testbench plays the processor:
//   - it loads a network that separates the two pulse heights;
//   - it opens a detection window after each trigger;
//   - it collects the time tags of the detections leaving the chip into a
//     decay histogram of NBIN_T bins.
// The first half of the run has elimination on and the second half off.
//
// Checks:
//   - every output detection (class, probability, time tag) matches the
//     bit-true reference of the whole chain;
//   - the reference class agrees with the truth of each event;
//   - the elimination-on histogram equals the histogram of the emitted
//     photons alone;
//   - the elimination-off histogram equals photons plus dark counts;
//   - the PHOTONS, DARKS and REMOVED counters agree.
// Both histograms are printed with their tail counts (beyond 4 TAU_EM, where
// the photon decay has died out) and their RMS deviation from the ideal
// exponential decay. That tail must hold no dark count with elimination on,
// and some without it.
// The pipeline runs at reduced size (64-sample window, 8-6-4 network) to keep
// the run short. Events are spaced further apart than the pipeline's dead
// time, so nothing is missed.
module tb_squad_pl_decay;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  localparam int WIN = 64, PRE = 8, NBINS = 64, BIN_SHIFT = 7, PERIOD = 6000, PULSE_W = 4;
  localparam int H1 = 8, H2 = 6, H3 = 4;
  localparam int NPER = 400;
  localparam int TAU_MIN = 8, TAU_MAX = 20;          // pulse decay, samples
  localparam int TAU_EM = 600;                        // emitter decay, samples
  localparam int THR = 1500, WIN_DELAY = 40, WIN_LEN = 5000;
  localparam int SPAN = WIN_LEN - 400;               // emission times are drawn in [0, SPAN)
  localparam int NBIN_T = 10, TBIN = SPAN / NBIN_T;
  localparam int NW = N_FEAT*H1 + H1*H2 + H2*H3 + H3*2;
  localparam int NB = H1 + H2 + H3 + 2;
  localparam int NSAMP = NPER * PERIOD;
  localparam int PH_B = NPER / 2;

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
  int norm_gain [N_FEAT] = '{1, 8, 16, 4, 1, 2};
  int norm_off  [N_FEAT] = '{3600, 0, 0, 0, 0, 0};

  typedef struct { int cls; int score; int tstamp; bit pass; int per; } exp_t;
  exp_t expq [$];
  int e_cls1 = 0, e_cls0 = 0, e_removed = 0;
  // decay histograms: truth per phase, and what left the chip per phase
  int h_ph [2][NBIN_T], h_dc [2][NBIN_T], h_out [2][NBIN_T];
  int n_ph = 0, n_dc = 0, got = 0;
  real rms [2];
  int tail [2];               // non-photon detections beyond 4 TAU_EM

  squad_top #(.WIN(WIN), .PRE(PRE), .NBINS(NBINS), .BIN_SHIFT(BIN_SHIFT), .PERIOD(PERIOD),
              .PULSE_W(PULSE_W), .H1(H1), .H2(H2), .H3(H3)) dut (
    .clk, .rst_n, .adc_valid, .adc_data, .dac_trig, .det_window,
    .host_wr, .host_rd, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .det_valid, .det_cls, .det_score, .det_tstamp);

  initial begin
    repeat (NSAMP + NW + NB + 200000) @(posedge clk);
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

  task automatic add_pulse(input int k0, input int amp);
    int rise;
    real tau;
    rise = $urandom_range(2, 6);
    tau  = real'($urandom_range(TAU_MIN, TAU_MAX));
    for (int k = 0; k < 6 * TAU_MAX + rise && k0 + k < NSAMP; k++)
      stream[k0 + k] = pulse_at(k, amp, rise, tau, 300) + int'($urandom_range(0, 40));
  endtask

  // reference of the chain for the detection crossing at stream index c
  task automatic predict(input int c, input int per, input bit is_photon);
    int cap [], x [], z [];
    feat_ref_t f;
    int fac, raw [N_FEAT], cls, score;
    exp_t e;
    cap = new[WIN];
    for (int i = 0; i < WIN; i++) cap[i] = stream[c - PRE + i];
    f = feat_ref(cap, THR, PRE);
    fac = sat16(longint'(f.vmax - 3400));
    raw = '{f.vmax, f.fwhm, f.rise, f.fall, fac, 70};
    x = new[N_FEAT];
    foreach (x[i]) x[i] = sat16(longint'(raw[i] - norm_off[i]) * longint'(norm_gain[i]));
    nn_ref(x, w, b, sizes, z);
    cls   = (z[1] > z[0]) ? 1 : 0;
    score = sig_ref(sat16(longint'(z[1]) - longint'(z[0])));
    checks++;
    if (cls !== int'(is_photon)) begin
      failures++; $display("period %0d: reference class %0d for a %s", per, cls,
                           is_photon ? "photon" : "dark count");
    end
    e.cls = cls; e.score = score; e.tstamp = c % PERIOD; e.per = per;
    e.pass = (per >= PH_B) || cls == 1;
    if (cls == 1) e_cls1++; else e_cls0++;
    if (!e.pass) e_removed++;
    expq.push_back(e);
  endtask

  always @(negedge clk) if (det_valid) begin
    exp_t e;
    int tb;
    got++;
    while (expq.size() > 0 && !expq[0].pass) void'(expq.pop_front());
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected detection t=%0d", det_tstamp);
    end else begin
      e = expq.pop_front();
      if (int'(det_cls) !== e.cls || int'(det_score) !== e.score || int'(det_tstamp) !== e.tstamp) begin
        failures++;
        $display("period %0d: got cls=%0d score=%0d t=%0d, expected cls=%0d score=%0d t=%0d",
                 e.per, det_cls, det_score, det_tstamp, e.cls, e.score, e.tstamp);
      end
      tb = (int'(det_tstamp) - WIN_DELAY) / TBIN;
      if (tb >= 0 && tb < NBIN_T) h_out[e.per >= PH_B][tb]++;
    end
  end

  initial begin
    int d;
    int ev_t [NPER];
    int ev_k [NPER];     // 0 none, 1 photon, 2 dark count
    host_wr = 0; host_rd = 0; host_addr = 0; host_wdata = 0;
    adc_valid = 0; adc_data = 0;
    sizes = '{N_FEAT, H1, H2, H3, 2};
    foreach (h_ph[p, i]) begin h_ph[p][i] = 0; h_dc[p][i] = 0; h_out[p][i] = 0; end

    // network as in tb_squad_top: hidden neuron 0 of each layer follows the pulse height
    w = new[NW]; b = new[NB];
    begin
      int wp, bp;
      wp = 0; bp = 0;
      for (int l = 0; l < 4; l++) begin
        for (int o = 0; o < sizes[l+1]; o++) begin
          for (int i = 0; i < sizes[l]; i++) begin
            w[wp] = int'($urandom_range(0, 32)) - 16;
            if (o == 0 && i == 0) w[wp] = (l == 0) ? 768 : ((l == 3) ? 1024 : 1280);
            if (l == 3 && o == 1 && i == 0) w[wp] = -1024;
            wp++;
          end
          b[bp] = int'($urandom_range(0, 32)) - 16;
          if (o == 0 && l > 0 && l < 3) b[bp] = -640;
          if (l == 3) b[bp] = (o == 0) ? -512 : 512;
          bp++;
        end
      end
    end

    // events: photon with exponential delay (50 %), dark count uniform (30 %), none (20 %)
    stream = new[NSAMP];
    foreach (stream[i]) stream[i] = $urandom_range(0, 1200);
    for (int p = 0; p < NPER; p++) begin
      int r, t;
      r = $urandom_range(0, 99);
      ev_k[p] = (r < 50) ? 1 : ((r < 80) ? 2 : 0);
      if (ev_k[p] == 1) begin
        real u;
        u = (real'($urandom_range(1, 1000000)) / 1000000.0);
        t = WIN_DELAY + PRE + int'(-real'(TAU_EM) * $ln(u));
        if (t > WIN_DELAY + PRE + SPAN - 1) ev_k[p] = 0;   // emitted after the window: not seen
      end else begin
        t = $urandom_range(WIN_DELAY + PRE, WIN_DELAY + PRE + SPAN - 1);
      end
      ev_t[p] = t;
      if (ev_k[p] !== 0)
        add_pulse(p * PERIOD + t, (ev_k[p] == 1) ? int'($urandom_range(3300, 3500))
                                                 : int'($urandom_range(3750, 3950)));
    end
    for (int p = 0; p < NPER; p++) if (ev_k[p] !== 0) begin
      int c, tb;
      c = crossing_after(p * PERIOD + ev_t[p]);
      predict(c, p, ev_k[p] == 1);
      tb = (c % PERIOD - WIN_DELAY) / TBIN;
      if (ev_k[p] == 1) begin h_ph[p >= PH_B][tb]++; n_ph++; end
      else              begin h_dc[p >= PH_B][tb]++; n_dc++; end
    end

    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (NBINS + 4) @(negedge clk);
    for (int i = 0; i < NW; i++) wr(WEIGHT0 + 16'(i), w[i]);
    for (int i = 0; i < NB; i++) wr(BIAS0 + 16'(i), b[i]);
    for (int i = 0; i < N_FEAT; i++) begin
      wr(REG_NORM_OFF0 + 16'(i), norm_off[i]);
      wr(REG_NORM_GAIN0 + 16'(i), norm_gain[i]);
    end
    wr(REG_WIN_DELAY, WIN_DELAY);
    wr(REG_WIN_LEN, WIN_LEN);
    wr(REG_CTRL, 32'h03);   // trigger on, elimination on, dark-count mode

    do @(negedge clk); while (!dac_trig);
    fork
      for (int k = 0; k < NSAMP; k++) begin
        adc_valid = 1; adc_data = sample_t'(stream[k]);
        @(negedge clk);
      end
      begin
        // elimination off for the second half, switched at the end of a period
        repeat (PH_B * PERIOD - 200) @(negedge clk);
        @(negedge clk); host_wr = 1; host_addr = REG_CTRL; host_wdata = 32'h01;
        @(negedge clk); host_wr = 0;
      end
    join
    adc_valid = 0;
    repeat (20) @(negedge clk);

    while (expq.size() > 0 && !expq[0].pass) void'(expq.pop_front());
    checks++;
    if (expq.size() !== 0) begin failures++; $display("%0d detections missing", expq.size()); end

    // decay histograms, and their RMS deviation from the ideal exponential
    // decay of the photons emitted in the same phase
    for (int ph = 0; ph < 2; ph++) begin
      int tail_out, tail_ph, nph;
      real se;
      tail_out = 0; tail_ph = 0; nph = 0; se = 0.0;
      for (int i = 0; i < NBIN_T; i++) nph += h_ph[ph][i];
      for (int i = 0; i < NBIN_T; i++) begin
        real ideal;
        ideal = real'(nph) * ($exp(-real'(i * TBIN) / TAU_EM) - $exp(-real'((i + 1) * TBIN) / TAU_EM))
                / (1.0 - $exp(-real'(SPAN) / TAU_EM));
        se += (real'(h_out[ph][i]) - ideal) ** 2;
      end
      rms[ph] = $sqrt(se / NBIN_T);
      $display("%s: bin(start sample)  emitted photons  dark counts  detections out",
               ph == 0 ? "elimination on " : "elimination off");
      for (int i = 0; i < NBIN_T; i++) begin
        int expect_out;
        expect_out = h_ph[ph][i] + (ph == 1 ? h_dc[ph][i] : 0);
        $display("  %5d  %5d  %5d  %5d", WIN_DELAY + i * TBIN, h_ph[ph][i], h_dc[ph][i], h_out[ph][i]);
        checks++;
        if (h_out[ph][i] !== expect_out) begin
          failures++; $display("  bin %0d: %0d detections, expected %0d", i, h_out[ph][i], expect_out);
        end
        if (i * TBIN >= 4 * TAU_EM) begin tail_out += h_out[ph][i]; tail_ph += h_ph[ph][i]; end
      end
      $display("  tail beyond 4 decay times: %0d detections, %0d of them photons; RMS error against the ideal decay %0.2f",
               tail_out, tail_ph, rms[ph]);
      tail[ph] = tail_out - tail_ph;
    end
    $display("RMS error ratio, elimination off / on: %0.2f", rms[1] / rms[0]);
    checks += 2;
    if (tail[0] !== 0) begin failures++; $display("detections in the tail with elimination on"); end
    if (tail[1] == 0)  begin failures++; $display("no dark-count background with elimination off"); end

    rd(REG_PHOTONS, d); checks++; if (d !== e_cls1)    begin failures++; $display("class-1 count %0d exp %0d", d, e_cls1); end
    rd(REG_DARKS, d);   checks++; if (d !== e_cls0)    begin failures++; $display("class-0 count %0d exp %0d", d, e_cls0); end
    rd(REG_REMOVED, d); checks++; if (d !== e_removed) begin failures++; $display("removed %0d exp %0d", d, e_removed); end
    rd(REG_MISSED, d);  checks++; if (d !== 0)         begin failures++; $display("missed %0d", d); end

    $display("photons %0d, dark counts %0d, removed %0d, detections out %0d", n_ph, n_dc, e_removed, got);
    checks += 2;
    if (e_removed == 0) begin failures++; $display("no dark count removed"); end
    if (got == 0)       begin failures++; $display("nothing came out"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
