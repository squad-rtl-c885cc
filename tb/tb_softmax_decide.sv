// tb_softmax_decide: random and extreme logit pairs; the class must be the
// arg-max (ties -> 0) and the score the (approximated) softmax probability
// of class 1, sigmoid(z1 - z0); checks the one-cycle latency.
module tb_softmax_decide;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, cls;
  act_t z0, z1, score;
  logic [31:0] in_tstamp, out_tstamp;
  int checks = 0, failures = 0;

  softmax_decide dut (.clk, .rst_n, .in_valid, .z0, .z1, .in_tstamp, .out_valid, .cls, .score, .out_tstamp);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; z0 = 0; z1 = 0; in_tstamp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int a, b;
      a = (n < 500) ? int'($urandom_range(0, 4000)) - 2000 : int'($urandom_range(0, 65535)) - 32768;
      b = (n < 500) ? int'($urandom_range(0, 4000)) - 2000 : int'($urandom_range(0, 65535)) - 32768;
      if (n == 3) b = a;
      @(negedge clk);
      in_valid = 1; z0 = act_t'(a); z1 = act_t'(b); in_tstamp = 32'(n + 77);
      @(negedge clk);
      in_valid = 0;
      checks += 3;
      if (!out_valid || out_tstamp !== 32'(n + 77)) begin failures++; $display("valid"); end
      if (cls !== (b > a)) begin failures++; $display("cls z0=%0d z1=%0d", a, b); end
      if (int'(score) !== sig_ref(sat16(longint'(b - a)))) begin failures++; $display("score %0d", score); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
