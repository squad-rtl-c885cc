// tb_noise_filter: streams noise with SNSPD-like pulses into the threshold
// filter. Checks, against a model computed from the stream itself: the
// samples written to the buffer (window starting PRE samples before the
// crossing), the event summary (maximum, peak index, crossing and last
// above-threshold index, time tag), the hold until release with the
// missed-detection pulse, and that pulses outside the window are ignored.
module tb_noise_filter;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  localparam int WIN = 64, PRE = 8, THR = 1500, N = 1200;
  logic clk = 0, rst_n = 0;
  logic s_valid, window, buf_we, ev_valid, release_buf, busy, missed;
  sample_t s_data, buf_wdata, threshold;
  logic [5:0] buf_waddr;
  logic [31:0] tstamp;
  event_info_t ev_info;
  int stream [N];
  logic win_arr [N];
  int cap [WIN];
  int checks = 0, failures = 0, nmissed = 0, nevents = 0;

  noise_filter #(.WIN(WIN), .PRE(PRE)) dut (.clk, .rst_n, .s_valid, .s_data, .window, .tstamp,
    .threshold, .buf_we, .buf_waddr, .buf_wdata, .ev_valid, .ev_info, .release_buf, .busy, .missed);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (buf_we) cap[buf_waddr] <= int'(buf_wdata);
  always @(posedge clk) if (missed) nmissed++;

  // expected event for the pulse whose crossing is at stream index c
  task automatic expect_event(input int c);
    int exp_cap[];
    feat_ref_t f;
    exp_cap = new[WIN];
    for (int i = 0; i < WIN; i++) exp_cap[i] = stream[c - PRE + i];
    f = feat_ref(exp_cap, THR, PRE);
    wait (ev_valid);
    @(negedge clk);
    nevents++;
    checks += 6;
    if (int'(ev_info.vmax) !== f.vmax)      begin failures++; $display("vmax %0d exp %0d", ev_info.vmax, f.vmax); end
    if (int'(ev_info.peak_idx) !== f.peak)  begin failures++; $display("peak %0d exp %0d", ev_info.peak_idx, f.peak); end
    if (int'(ev_info.start_idx) !== f.start) begin failures++; $display("start"); end
    if (int'(ev_info.end_idx) !== f.stop)   begin failures++; $display("end %0d exp %0d", ev_info.end_idx, f.stop); end
    if (int'(ev_info.tstamp) !== c)         begin failures++; $display("tstamp %0d exp %0d", ev_info.tstamp, c); end
    if (!busy) failures++;
    @(negedge clk);   // the last sample is written in the ev_valid cycle
    for (int i = 0; i < WIN; i++) begin
      checks++;
      if (cap[i] !== exp_cap[i]) begin failures++; if (failures < 20) $display("cap[%0d]=%0d exp %0d", i, cap[i], exp_cap[i]); end
    end
  endtask

  initial begin
    // noise 0..1200, pulses at 100 (accepted), 130 (during capture -> missed),
    // 400 (outside window -> ignored), 600 (accepted after release)
    foreach (stream[k]) stream[k] = $urandom_range(0, 1200);
    foreach (win_arr[k]) win_arr[k] = !(k >= 380 && k < 450);
    for (int k = 0; k < 120; k++) if (100 + k < N) stream[100 + k] = pulse_at(k, 3500, 6, 20.0, 300);
    for (int k = 0; k < 30; k++)  stream[130 + k] = pulse_at(k, 3000, 4, 5.0, 300);
    for (int k = 0; k < 40; k++)  stream[400 + k] = pulse_at(k, 3900, 5, 10.0, 300);
    for (int k = 0; k < 150; k++) stream[600 + k] = pulse_at(k, 4200, 8, 30.0, 300);
    stream[99] = 200; stream[599] = 200;
    threshold = sample_t'(THR);
    s_valid = 0; s_data = 0; window = 0; tstamp = 0; release_buf = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int k = 0; k < N; k++) begin
          @(negedge clk);
          s_valid = 1; s_data = sample_t'(stream[k]); window = win_arr[k]; tstamp = 32'(k);
        end
        @(negedge clk); s_valid = 0;
      end
      begin
        // the crossing into 100: first sample >= THR after 99
        int c1, c2;
        c1 = 100; while (stream[c1] < THR) c1++;
        expect_event(c1);
        repeat (200) @(negedge clk);
        checks++;
        if (!busy) begin failures++; $display("hold lost"); end
        release_buf = 1; @(negedge clk); release_buf = 0;
        c2 = 600; while (stream[c2] < THR) c2++;
        expect_event(c2);
        release_buf = 1; @(negedge clk); release_buf = 0;
      end
    join
    checks += 2;
    if (nevents !== 2) begin failures++; $display("events %0d", nevents); end
    if (nmissed < 1)  begin failures++; $display("no missed pulse"); end
    $display("missed=%0d", nmissed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
