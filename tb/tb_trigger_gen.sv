// tb_trigger_gen: checks the trigger period and pulse width (default and
// programmed), the time tag sequence and the detection window against a
// counter model kept in the testbench.
module tb_trigger_gen;
  import squad_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] period = 0, pulse_w = 0, win_delay = 20, win_len = 30;
  logic trig_out, window;
  logic [31:0] tstamp;
  int checks = 0, failures = 0;

  trigger_gen #(.PERIOD(100), .PULSE_W(4)) dut (.clk, .rst_n, .en, .period, .pulse_w,
    .win_delay, .win_len, .trig_out, .window, .tstamp);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(input int per, input int pw, input int ncyc);
    int exp_t, last_rise, rises, high;
    logic prev_trig;
    exp_t = -1; last_rise = -1; rises = 0; high = 0; prev_trig = 1'b1;
    for (int c = 0; c < ncyc; c++) begin
      @(negedge clk);
      if (exp_t < 0) exp_t = int'(tstamp);
      checks++;
      if (int'(tstamp) !== exp_t) begin failures++; $display("tstamp %0d exp %0d", tstamp, exp_t); end
      checks++;
      if (trig_out !== (exp_t < pw)) begin failures++; $display("trig at t=%0d", exp_t); end
      checks++;
      if (window !== (exp_t >= int'(win_delay) && exp_t < int'(win_delay + win_len))) begin
        failures++; $display("window at t=%0d", exp_t);
      end
      if (trig_out && !prev_trig) begin
        if (last_rise >= 0) begin
          checks++;
          if (c - last_rise !== per) begin failures++; $display("period %0d exp %0d", c - last_rise, per); end
        end
        last_rise = c; rises++;
      end
      prev_trig = trig_out;
      exp_t = (exp_t + 1) % per;
    end
    checks++;
    if (rises < ncyc / per - 1) begin failures++; $display("only %0d triggers", rises); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++; if (trig_out || window || tstamp !== 0) failures++;   // disabled
    en = 1;
    @(negedge clk);
    run_and_check(100, 4, 450);
    period = 37; pulse_w = 9; win_delay = 5; win_len = 3;
    en = 0; @(negedge clk); @(negedge clk); en = 1; @(negedge clk);
    run_and_check(37, 9, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
