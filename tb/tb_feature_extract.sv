// tb_feature_extract: presents captured windows (random SNSPD-like pulses)
// through a model of the event buffer with one-cycle read latency, and
// compares maximum, FWHM, rise and fall time with the reference feature
// definitions, and the start-to-result latency with WIN + 2 cycles.
module tb_feature_extract;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  localparam int WIN = 64, PRE = 8, THR = 1500;
  logic clk = 0, rst_n = 0;
  logic start, feat_valid, busy;
  event_info_t ev_info;
  logic [5:0] buf_raddr;
  sample_t buf_rdata;
  features_t feat;
  int mem [WIN];
  int checks = 0, failures = 0;

  feature_extract #(.WIN(WIN)) dut (.clk, .rst_n, .start, .ev_info, .buf_raddr, .buf_rdata,
    .feat_valid, .feat, .busy);

  always #5 clk = ~clk;
  always @(posedge clk) buf_rdata <= sample_t'(mem[buf_raddr]);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ev_info = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int cap[];
      feat_ref_t f;
      int amp, rise, lat;
      real tau;
      amp  = $urandom_range(1600, 4200);
      rise = $urandom_range(1, 12);
      tau  = real'($urandom_range(3, 40));
      cap = new[WIN];
      for (int i = 0; i < WIN; i++) begin
        cap[i] = pulse_at(i - PRE + rise / 2, amp, rise, tau, $urandom_range(0, 400));
        mem[i] = cap[i];
      end
      if (n == 0) for (int i = 0; i < WIN; i++) begin cap[i] = 100; mem[i] = 100; end  // flat
      f = feat_ref(cap, THR, PRE);
      @(negedge clk);
      start = 1;
      ev_info.vmax = sample_t'(f.vmax); ev_info.peak_idx = 16'(f.peak);
      ev_info.start_idx = 16'(f.start); ev_info.end_idx = 16'(f.stop);
      ev_info.tstamp = 32'(1000 + n);
      @(negedge clk);
      start = 0;
      ev_info = '0;   // the block must have latched the summary
      lat = 1;
      while (!feat_valid) begin @(negedge clk); lat++; end
      checks += 6;
      if (lat !== WIN + 2)              begin failures++; $display("latency %0d", lat); end
      if (int'(feat.vmax) !== f.vmax)   begin failures++; $display("vmax"); end
      if (int'(feat.fwhm) !== f.fwhm)   begin failures++; $display("n=%0d fwhm %0d exp %0d", n, feat.fwhm, f.fwhm); end
      if (int'(feat.rise) !== f.rise)   begin failures++; $display("rise %0d exp %0d", feat.rise, f.rise); end
      if (int'(feat.fall) !== f.fall)   begin failures++; $display("fall %0d exp %0d", feat.fall, f.fall); end
      if (feat.tstamp !== 32'(1000 + n)) begin failures++; $display("tstamp"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
