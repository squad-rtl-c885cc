// tb_calibrator: random maxima, references and slopes (including values
// that saturate) against factor = sat16(floor((vmax - ref) * gain / 256)),
// computed in real arithmetic; checks the one-cycle latency and that the
// features pass through unchanged.
module tb_calibrator;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  features_t in_feat, out_feat;
  sample_t ref_value, gain, factor;
  int checks = 0, failures = 0;

  calibrator dut (.clk, .rst_n, .in_valid, .in_feat, .ref_value, .gain, .out_valid, .out_feat, .factor);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_feat = '0; ref_value = 0; gain = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int v, r, g, e;
      v = $urandom_range(0, 4500);
      r = (n % 2) ? 3400 : 3800;
      g = (n < 450) ? int'($urandom_range(0, 1024)) - 512 : int'($urandom_range(0, 65535)) - 32768;
      e = sat16(longint'($floor(real'(v - r) * real'(g) / 256.0)));
      @(negedge clk);
      in_valid = 1; in_feat = '0; in_feat.vmax = sample_t'(v); in_feat.fwhm = 16'(n);
      in_feat.tstamp = 32'(n * 3); ref_value = sample_t'(r); gain = sample_t'(g);
      @(negedge clk);
      in_valid = 0;
      checks += 4;
      if (!out_valid)               begin failures++; $display("no valid"); end
      if (int'(factor) !== e)        begin failures++; $display("v=%0d r=%0d g=%0d f=%0d exp %0d", v, r, g, factor, e); end
      if (out_feat.fwhm !== 16'(n))  failures++;
      if (out_feat.tstamp !== 32'(n * 3)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
