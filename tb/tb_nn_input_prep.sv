// tb_nn_input_prep: random features, calibration factors, bias settings,
// offsets and gains; checks each scaled input q = sat16((x - off) * gain)
// and its position in the vector, and the one-cycle latency.
module tb_nn_input_prep;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  features_t in_feat;
  sample_t factor, bias_setting;
  sample_t off [N_FEAT];
  sample_t gain [N_FEAT];
  act_t x [N_FEAT];
  logic [31:0] out_tstamp;
  int checks = 0, failures = 0;

  nn_input_prep dut (.clk, .rst_n, .in_valid, .in_feat, .factor, .bias_setting, .off, .gain,
    .out_valid, .x, .out_tstamp);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_feat = '0; factor = 0; bias_setting = 0;
    foreach (off[i]) begin off[i] = 0; gain[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int raw [N_FEAT];
      raw[0] = $urandom_range(0, 4500);
      raw[1] = $urandom_range(0, 200);
      raw[2] = $urandom_range(0, 60);
      raw[3] = $urandom_range(0, 400);
      raw[4] = int'($urandom_range(0, 4000)) - 2000;
      raw[5] = $urandom_range(0, 200);
      @(negedge clk);
      in_valid = 1;
      in_feat.vmax = sample_t'(raw[0]); in_feat.fwhm = 16'(raw[1]); in_feat.rise = 16'(raw[2]);
      in_feat.fall = 16'(raw[3]); factor = sample_t'(raw[4]); bias_setting = sample_t'(raw[5]);
      in_feat.tstamp = 32'(n);
      foreach (off[i]) begin
        off[i]  = sample_t'(int'($urandom_range(0, 400)) - 200);
        gain[i] = sample_t'((n < 250) ? int'($urandom_range(0, 64)) - 16 : int'($urandom_range(0, 4000)) - 2000);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_tstamp !== 32'(n)) begin failures++; $display("valid/tstamp"); end
      for (int i = 0; i < N_FEAT; i++) begin
        int e;
        e = sat16(longint'(raw[i] - int'(off[i])) * longint'(int'(gain[i])));
        checks++;
        if (int'(x[i]) !== e) begin failures++; $display("x[%0d]=%0d exp %0d", i, x[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
