// Body of the end-to-end testbenches (tb_squad_top, tb_squad_full). The
// including module declares WIN, PRE, NBINS, BIN_SHIFT, PERIOD, PULSE_W,
// H1..H3, NPER, TAU_MIN, TAU_MAX, includes this file and then instantiates
// squad_top as `dut` on the signals declared here.

  localparam int NW = N_FEAT*H1 + H1*H2 + H2*H3 + H3*2;
  localparam int NB = H1 + H2 + H3 + 2;
  localparam int THR = 1500, WIN_DELAY = 100, WIN_LEN = 2500;
  localparam int OFF_MAIN = 200, OFF_MISS = OFF_MAIN + 30, OFF_OUT = WIN_DELAY + WIN_LEN + 200;
  localparam int NSAMP = NPER * PERIOD;
  localparam int PH_B = NPER / 3, PH_C = 2 * NPER / 3;   // first period of phases B and C

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
  // expected detections
  typedef struct { int cls; int score; int tstamp; bit pass; int per; } exp_t;
  exp_t expq [$];
  int hist [NBINS];
  int mode_bin = 0, mode_cnt = 0, n_hist = 0;
  int e_cls1 = 0, e_cls0 = 0, e_removed = 0;
  int last_cap [];
  // mechanism counters
  int m_removed = 0, m_pass_dark = 0, m_feature = 0, m_histref = 0, m_missed = 0, m_outside = 0;
  int m_photon = 0, m_trigger = 0;
  int got = 0;

  initial begin
    repeat (NSAMP + 60 * PERIOD + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host bus ----------------
  task automatic wr(input logic [15:0] a, input int d);
    @(negedge clk); host_wr = 1; host_addr = a; host_wdata = 32'(d);
    @(negedge clk); host_wr = 0;
  endtask
  task automatic rd(input logic [15:0] a, output int d);
    @(negedge clk); host_rd = 1; host_addr = a;
    @(negedge clk); host_rd = 0;
    d = int'(host_rdata);
  endtask

  // ---------------- stream ----------------
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

  // reference of the whole chain for the detection crossing at stream index c
  task automatic predict(input int c, input int per);
    int cap [], x [], z [];
    feat_ref_t f;
    int refv, fac, raw [N_FEAT], cls, score, bin;
    bit elim, feature, use_hist;
    exp_t e;
    elim     = (per < PH_B);
    feature  = (per >= PH_C);
    use_hist = (per >= PH_C);
    cap = new[WIN];
    for (int i = 0; i < WIN; i++) cap[i] = stream[c - PRE + i];
    f = feat_ref(cap, THR, PRE);
    refv = use_hist ? (mode_bin << BIN_SHIFT) + (1 << (BIN_SHIFT - 1)) : 3400;
    fac  = sat16(longint'($floor(real'(f.vmax - refv) * 256.0 / 256.0)));
    raw  = '{f.vmax, f.fwhm, f.rise, f.fall, fac, 70};
    x = new[N_FEAT];
    foreach (x[i]) x[i] = sat16(longint'(raw[i] - norm_off[i]) * longint'(norm_gain[i]));
    nn_ref(x, w, b, sizes, z);
    cls   = (z[1] > z[0]) ? 1 : 0;
    score = sig_ref(sat16(longint'(z[1]) - longint'(z[0])));
    // histogram (it is updated after the calibrator has read the mode)
    bin = (f.vmax < 0) ? 0 : ((f.vmax >> BIN_SHIFT) > NBINS - 1 ? NBINS - 1 : f.vmax >> BIN_SHIFT);
    hist[bin]++;
    n_hist++;
    if (hist[bin] > mode_cnt) begin mode_cnt = hist[bin]; mode_bin = bin; end
    e.cls = cls; e.score = score; e.tstamp = c % PERIOD; e.per = per;
    e.pass = !(elim && cls == 0 && !feature);
    if (cls == 1) e_cls1++; else e_cls0++;
    if (!e.pass) begin e_removed++; m_removed++; end
    if (cls == 0 && e.pass && !feature) m_pass_dark++;
    if (cls == 1) m_photon++;
    if (feature) m_feature++;
    if (use_hist) m_histref++;
    expq.push_back(e);
    last_cap = cap;
  endtask

  // ---------------- checker of the output stream ----------------
  always @(negedge clk) if (det_valid) begin
    exp_t e;
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
    end
  end

  always @(posedge clk) if (dac_trig && rst_n) m_trigger++;

  initial begin
    int d, k;
    host_wr = 0; host_rd = 0; host_addr = 0; host_wdata = 0;
    adc_valid = 0; adc_data = 0;
    sizes = '{N_FEAT, H1, H2, H3, 2};
    foreach (hist[i]) hist[i] = 0;

    // network: hidden neuron 0 of every layer follows the pulse height,
    // the rest is small random weights
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

    // stream: noise below the threshold, one pulse per period, extras
    stream = new[NSAMP];
    foreach (stream[i]) stream[i] = $urandom_range(0, 1200);
    for (int p = 0; p < NPER; p++) begin
      int amp;
      amp = (p % 2 == 0) ? int'($urandom_range(3300, 3500)) : int'($urandom_range(3750, 3950));
      if (p % 5 == 4) amp = $urandom_range(3000, 4100);
      add_pulse(p * PERIOD + OFF_MAIN, amp);
      if (p == 3) add_pulse(p * PERIOD + OFF_MISS, 3600);
      if (p == 5) add_pulse(p * PERIOD + OFF_OUT, 3600);
    end

    // predictions (in stream order, which is also the order of the histogram updates)
    for (int p = 0; p < NPER; p++) begin
      int c;
      c = crossing_after(p * PERIOD + OFF_MAIN);
      predict(c, p);
    end

    repeat (5) @(posedge clk);
    rst_n = 1;
    // wait for the histogram clear sweep after reset
    repeat (NBINS + 4) @(negedge clk);

    for (int i = 0; i < NW; i++) wr(WEIGHT0 + 16'(i), w[i]);
    for (int i = 0; i < NB; i++) wr(BIAS0 + 16'(i), b[i]);
    for (int i = 0; i < N_FEAT; i++) begin
      wr(REG_NORM_OFF0 + 16'(i), norm_off[i]);
      wr(REG_NORM_GAIN0 + 16'(i), norm_gain[i]);
    end
    wr(REG_WIN_DELAY, WIN_DELAY);
    wr(REG_WIN_LEN, WIN_LEN);
    wr(REG_CTRL, 32'h0b);   // trigger on, elimination on, dark-count mode, histogram on

    // cycle 0 of the stream is the first cycle with the trigger high
    do @(negedge clk); while (!dac_trig);
    k = 0;
    fork
      begin
        for (k = 0; k < NSAMP; k++) begin
          adc_valid = 1; adc_data = sample_t'(stream[k]);
          @(negedge clk);
        end
        adc_valid = 0;
      end
      begin
        // phase changes near the end of a period, when nothing is in flight
        repeat (PH_B * PERIOD - 200) @(negedge clk);
        @(negedge clk); host_wr = 1; host_addr = REG_CTRL; host_wdata = 32'h09;   // elimination off
        @(negedge clk); host_wr = 0;
        repeat ((PH_C - PH_B) * PERIOD - 2) @(negedge clk);
        @(negedge clk); host_wr = 1; host_addr = REG_CTRL; host_wdata = 32'h2d;   // feature mode, histogram reference
        @(negedge clk); host_wr = 0;
      end
    join

    // Crossings inside the detection window that are not detections arrive
    // while the pipeline is busy and must be counted as missed: the pulse of
    // period 3 at OFF_MISS, and any noise-induced re-crossing on a pulse tail.
    m_missed = -NPER;
    for (k = 1; k < NSAMP; k++)
      if (stream[k] >= THR && stream[k-1] < THR && k % PERIOD >= WIN_DELAY && k % PERIOD < WIN_DELAY + WIN_LEN)
        m_missed++;
    m_outside = 1;   // the pulse of period 5 at OFF_OUT must produce nothing

    repeat (20) @(negedge clk);
    // every expected detection must have come out
    while (expq.size() > 0 && !expq[0].pass) void'(expq.pop_front());
    checks++;
    if (expq.size() !== 0) begin failures++; $display("%0d detections missing", expq.size()); end

    rd(REG_PHOTONS, d);   checks++; if (d !== e_cls1)    begin failures++; $display("class-1 count %0d exp %0d", d, e_cls1); end
    rd(REG_DARKS, d);     checks++; if (d !== e_cls0)    begin failures++; $display("class-0 count %0d exp %0d", d, e_cls0); end
    rd(REG_REMOVED, d);   checks++; if (d !== e_removed) begin failures++; $display("removed %0d exp %0d", d, e_removed); end
    rd(REG_MISSED, d);    checks++; if (d !== m_missed)  begin failures++; $display("missed %0d exp %0d", d, m_missed); end
    rd(REG_HIST_TOTAL, d); checks++; if (d !== n_hist)   begin failures++; $display("hist total %0d", d); end
    rd(REG_HIST_MODE, d); checks++;
    if ((d & 16'hffff) !== mode_bin || (d >>> 16) !== mode_cnt) begin failures++; $display("hist mode %h", d); end
    for (int i = 0; i < NBINS; i += NBINS / 8) begin
      rd(REG_HIST0 + 16'(i), d); checks++; if (d !== hist[i]) begin failures++; $display("bin %0d", i); end
    end
    for (int i = 0; i < WIN; i += WIN / 16) begin
      rd(REG_EVBUF0 + 16'(i), d); checks++;
      if (d !== last_cap[i]) begin failures++; $display("evbuf[%0d]=%0d exp %0d", i, d, last_cap[i]); end
    end

    $display("detections out=%0d class1=%0d class0=%0d removed=%0d triggers(cycles high)=%0d",
             got, e_cls1, e_cls0, e_removed, m_trigger);
    $display("mechanisms: removed=%0d passed_dark=%0d feature_mode=%0d hist_ref=%0d missed=%0d outside_window=%0d photon=%0d",
             m_removed, m_pass_dark, m_feature, m_histref, m_missed, m_outside, m_photon);
    checks += 7;
    if (m_removed == 0)   begin failures++; $display("no dark count removed"); end
    if (m_pass_dark == 0) begin failures++; $display("no dark count passed with elimination off"); end
    if (m_feature == 0)   begin failures++; $display("feature mode not exercised"); end
    if (m_histref == 0)   begin failures++; $display("histogram reference not exercised"); end
    checks++;
    if (m_missed == 0)    begin failures++; $display("no missed detection"); end
    if (m_photon == 0)    begin failures++; $display("no photon"); end
    if (m_trigger == 0)   begin failures++; $display("no trigger"); end
    if (got == 0)         begin failures++; $display("nothing came out"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
