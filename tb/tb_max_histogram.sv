// tb_max_histogram: feeds random maxima (two overlapping normal-like
// clusters, as for photons and dark counts) into a small histogram and
// checks every bin count, the total, the mode (its count must equal the
// largest bin), the reference value (mode bin centre) and the clear sweep.
module tb_max_histogram;
  import squad_pkg::*;

  localparam int NBINS = 32, SH = 4;
  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0, busy;
  sample_t in_value, ref_value;
  logic [4:0] mode_bin, rd_bin;
  logic [15:0] mode_count, rd_count;
  logic [31:0] total;
  int model [NBINS];
  int checks = 0, failures = 0;

  max_histogram #(.NBINS(NBINS), .BIN_SHIFT(SH), .CNT_BITS(16)) dut (.clk, .rst_n, .clear, .in_valid,
    .in_value, .mode_bin, .mode_count, .total, .ref_value, .busy, .rd_bin, .rd_count);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input int ntotal);
    int mx;
    mx = 0;
    for (int b = 0; b < NBINS; b++) begin
      rd_bin = 5'(b); #1;
      checks++;
      if (int'(rd_count) !== model[b]) begin failures++; $display("bin %0d = %0d exp %0d", b, rd_count, model[b]); end
      if (model[b] > mx) mx = model[b];
    end
    checks += 4;
    if (int'(total) !== ntotal)          begin failures++; $display("total %0d", total); end
    if (int'(mode_count) !== mx)          begin failures++; $display("mode count %0d exp %0d", mode_count, mx); end
    if (model[mode_bin] !== mx)           begin failures++; $display("mode bin %0d", mode_bin); end
    if (int'(ref_value) !== int'(mode_bin) * 16 + 8) begin failures++; $display("ref %0d", ref_value); end
  endtask

  initial begin
    rd_bin = 0; in_value = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (busy) @(negedge clk);
    foreach (model[b]) model[b] = 0;
    for (int n = 0; n < 600; n++) begin
      int v;
      // sum of uniforms -> bell-shaped around 340 (photons) or 380 (dark counts)
      v = (n % 3 == 0) ? 380 : 340;
      v += $urandom_range(0, 60) + $urandom_range(0, 60) - 60;
      if (n == 7)  v = -20;    // negative -> bin 0
      if (n == 11) v = 5000;   // beyond the range -> last bin
      @(negedge clk);
      in_valid = 1; in_value = sample_t'(v);
      begin
        int b;
        b = (v < 0) ? 0 : ((v >> SH) > NBINS - 1 ? NBINS - 1 : v >> SH);
        model[b]++;
      end
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check_all(600);
    // clear
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (!busy) failures++;
    while (busy) @(negedge clk);
    foreach (model[b]) model[b] = 0;
    @(negedge clk); in_valid = 1; in_value = 16'sd100; model[6]++;
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
