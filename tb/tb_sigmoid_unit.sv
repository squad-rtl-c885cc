// tb_sigmoid_unit: sweeps the Q7.8 input range of the piecewise-linear
// sigmoid and compares every sample with a real-valued evaluation of the
// same approximation; also checks symmetry y(x) + y(-x) = 1 and the range.
module tb_sigmoid_unit;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  act_t x, y, yn;
  int checks = 0, failures = 0;

  sigmoid_unit dut (.x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v <= 32767; v += 7) begin
      x = act_t'(v);
      #1;
      checks++;
      if (int'(y) !== sig_ref(v) || y < 0 || y > 256) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d expected %0d", v, y, sig_ref(v));
      end
    end
    // symmetry at a few points (|x| exact multiples keep floor symmetric)
    for (int v = 0; v < 2000; v += 64) begin
      x = act_t'(v); #1; yn = y;
      x = act_t'(-v); #1;
      checks++;
      if (int'(y) + int'(yn) !== 256) begin
        failures++;
        $display("symmetry x=%0d: %0d + %0d", v, yn, y);
      end
    end
    x = 16'sh0000; #1; checks++; if (y !== 128) failures++;
    x = 16'sh7fff; #1; checks++; if (y !== 256) failures++;
    x = 16'sh8000; #1; checks++; if (y !== 0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
