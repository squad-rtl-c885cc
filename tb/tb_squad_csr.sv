// tb_squad_csr: register bank. Checks the reset values, write/read-back of
// every configuration register, the self-clearing clear bits, the status
// and counter read-out, the event-buffer and histogram read windows (with
// small models of those memories) and the decoding of weight and bias
// writes.
module tb_squad_csr;
  import squad_pkg::*;

  localparam int WIN = 32, NBINS = 16, NW = 100, NB = 10;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, rd_valid, hist_clr, cnt_clr, w_we, b_we;
  logic [15:0] addr;
  logic [31:0] wr_data, rd_data;
  cfg_t cfg;
  status_t status;
  logic [4:0] evbuf_raddr;
  sample_t evbuf_rdata;
  logic [3:0] hist_rbin;
  logic [15:0] hist_rcount;
  logic [6:0] w_waddr;
  logic [3:0] b_waddr;
  act_t w_wdata, b_wdata;
  int checks = 0, failures = 0, nw = 0, nb = 0, nhc = 0, ncc = 0;

  squad_csr #(.WIN(WIN), .NBINS(NBINS), .NW(NW), .NB(NB)) dut (.clk, .rst_n, .wr_en, .rd_en, .addr,
    .wr_data, .rd_data, .rd_valid, .cfg, .hist_clr, .cnt_clr, .status, .evbuf_raddr, .evbuf_rdata,
    .hist_rbin, .hist_rcount, .w_we, .w_waddr, .w_wdata, .b_we, .b_waddr, .b_wdata);

  always #5 clk = ~clk;
  always @(posedge clk) evbuf_rdata <= sample_t'(1000 + int'(evbuf_raddr));
  assign hist_rcount = 16'(500 + int'(hist_rbin));
  always @(posedge clk) begin
    if (w_we) begin nw++; if (int'(w_waddr) !== 42 || w_wdata !== 16'sh1234) failures++; end
    if (b_we) begin nb++; if (int'(b_waddr) !== 3 || b_wdata !== -16'sd5) failures++; end
    if (hist_clr) nhc++;
    if (cnt_clr) ncc++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic rd_expect(input logic [15:0] a, input logic [31:0] e);
    @(negedge clk); rd_en = 1; addr = a;
    @(negedge clk); rd_en = 0;
    checks++;
    if (!rd_valid || rd_data !== e) begin failures++; $display("read %h = %h exp %h", a, rd_data, e); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; addr = 0; wr_data = 0;
    status = '0;
    status.cnt_cls1 = 11; status.cnt_cls0 = 22; status.cnt_missed = 33; status.cnt_removed = 44;
    status.hist_mode_bin = 7; status.hist_mode_count = 99; status.hist_total = 555;
    status.busy = 1; status.hist_busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    rd_expect(REG_CTRL, 32'h2);
    rd_expect(REG_THRESH, 1500);
    rd_expect(REG_CAL_REF, 3400);
    rd_expect(REG_CAL_GAIN, 256);
    rd_expect(REG_BIAS, 70);
    rd_expect(REG_WIN_LEN, 32'hffff_ffff);
    rd_expect(REG_NORM_GAIN0 + 16'd3, 1);
    // write / read back
    wr(REG_CTRL, 32'h2d);   // trig_en, mode, hist_en, use_hist_ref
    checks += 4;
    if (!cfg.trig_en || cfg.elim_en || cfg.mode !== MODE_FEATURE || !cfg.use_hist_ref) begin failures++; $display("ctrl"); end
    if (!cfg.hist_en) failures++;
    rd_expect(REG_CTRL, 32'h2d);
    wr(REG_PERIOD, 12345);     rd_expect(REG_PERIOD, 12345);
    wr(REG_PULSE_W, 9);        rd_expect(REG_PULSE_W, 9);
    wr(REG_WIN_DELAY, 100);    rd_expect(REG_WIN_DELAY, 100);
    wr(REG_WIN_LEN, 400);      rd_expect(REG_WIN_LEN, 400);
    wr(REG_THRESH, 1600);      rd_expect(REG_THRESH, 1600);
    wr(REG_CAL_REF, 3800);     rd_expect(REG_CAL_REF, 3800);
    wr(REG_CAL_GAIN, 32'hffff_ff00); rd_expect(REG_CAL_GAIN, 32'hffff_ff00);
    wr(REG_BIAS, 65);          rd_expect(REG_BIAS, 65);
    for (int i = 0; i < N_FEAT; i++) begin
      wr(REG_NORM_OFF0 + 16'(i), 32'(10 * i));  rd_expect(REG_NORM_OFF0 + 16'(i), 32'(10 * i));
      wr(REG_NORM_GAIN0 + 16'(i), 32'(3 + i));  rd_expect(REG_NORM_GAIN0 + 16'(i), 32'(3 + i));
      checks++;
      if (int'(cfg.norm_off[i]) !== 10 * i || int'(cfg.norm_gain[i]) !== 3 + i) failures++;
    end
    checks += 2;
    if (cfg.period !== 12345 || cfg.threshold !== 16'sd1600) begin failures++; $display("cfg1"); end
    if (cfg.cal_gain !== -16'sd256) begin failures++; $display("cfg2 %0d", cfg.cal_gain); end
    // clear pulses
    wr(REG_CTRL, 32'h50);
    @(negedge clk);
    checks += 2;
    if (nhc !== 1) begin failures++; $display("nhc %0d", nhc); end
    if (ncc !== 1) begin failures++; $display("ncc %0d", ncc); end
    // status
    rd_expect(REG_PHOTONS, 11);
    rd_expect(REG_DARKS, 22);
    rd_expect(REG_MISSED, 33);
    rd_expect(REG_REMOVED, 44);
    rd_expect(REG_HIST_MODE, {16'd99, 16'd7});
    rd_expect(REG_HIST_TOTAL, 555);
    rd_expect(REG_STATUS, 1);
    // memories
    rd_expect(REG_EVBUF0 + 16'd5, 1005);
    rd_expect(REG_EVBUF0 + 16'd31, 1031);
    rd_expect(REG_HIST0 + 16'd9, 509);
    rd_expect(16'h0030, 0);   // unmapped
    // parameter writes
    wr(WEIGHT0 + 16'd42, 32'h1234);
    wr(BIAS0 + 16'd3, 32'hfffb);
    wr(WEIGHT0 + 16'd100, 32'h1);   // beyond NW: no write
    wr(BIAS0 + 16'd10, 32'h1);      // beyond NB: no write
    checks += 2;
    if (nw !== 1) begin failures++; $display("weight writes %0d", nw); end
    if (nb !== 1) begin failures++; $display("bias writes %0d", nb); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
