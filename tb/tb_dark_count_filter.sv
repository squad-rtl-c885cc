// tb_dark_count_filter: random classified detections in the three
// operating cases (dark-count elimination on, off, and feature mode);
// checks which detections pass, their payload, and all counters, including
// missed detections and counter clearing.
module tb_dark_count_filter;
  import squad_pkg::*;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic elim_en, cnt_clr, in_valid, in_cls, missed, out_valid, out_cls;
  act_t in_score, out_score;
  logic [31:0] in_tstamp, out_tstamp, c1, c0, crem, cmiss;
  int e1 = 0, e0 = 0, erem = 0, emiss = 0;
  int checks = 0, failures = 0;

  dark_count_filter dut (.clk, .rst_n, .mode, .elim_en, .cnt_clr, .in_valid, .in_cls, .in_score,
    .in_tstamp, .missed, .out_valid, .out_cls, .out_score, .out_tstamp,
    .cnt_cls1(c1), .cnt_cls0(c0), .cnt_removed(crem), .cnt_missed(cmiss));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = MODE_DARK_ELIM; elim_en = 1; cnt_clr = 0; in_valid = 0; in_cls = 0; missed = 0;
    in_score = 0; in_tstamp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 900; n++) begin
      logic drop;
      mode    = (n >= 600) ? MODE_FEATURE : MODE_DARK_ELIM;
      elim_en = (n < 300) || (n >= 600);
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) !== 0);
      in_cls = $urandom_range(0, 1);
      missed = ($urandom_range(0, 9) == 0);
      in_score = act_t'($urandom_range(0, 256));
      in_tstamp = 32'($urandom);
      drop = (mode == MODE_DARK_ELIM) && elim_en && !in_cls;
      if (in_valid && in_cls) e1++;
      if (in_valid && !in_cls) e0++;
      if (in_valid && drop) erem++;
      if (missed) emiss++;
      @(negedge clk);
      checks++;
      if (out_valid !== (in_valid && !drop)) begin failures++; $display("n=%0d pass=%0b", n, out_valid); end
      if (out_valid) begin
        checks++;
        if (out_cls !== in_cls || out_score !== in_score || out_tstamp !== in_tstamp) failures++;
      end
      in_valid = 0; missed = 0;
      checks += 4;
      if (int'(c1) !== e1 || int'(c0) !== e0 || int'(crem) !== erem || int'(cmiss) !== emiss) begin
        failures += 4; $display("counters %0d %0d %0d %0d", c1, c0, crem, cmiss);
      end
    end
    cnt_clr = 1; @(negedge clk); cnt_clr = 0; @(negedge clk);
    checks++;
    if (c1 !== 0 || c0 !== 0 || crem !== 0 || cmiss !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
