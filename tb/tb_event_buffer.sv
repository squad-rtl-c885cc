// tb_event_buffer: fills the detection memory with random samples and reads
// them back on both ports, checking the one-cycle read latency.
module tb_event_buffer;
  import squad_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0;
  logic we;
  logic [5:0] waddr, ra, rb;
  sample_t wdata, da, db;
  sample_t model [DEPTH];
  int checks = 0, failures = 0;

  event_buffer #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata,
    .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; ra = 0; rb = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = sample_t'($urandom_range(0, 65535));
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      ra = 6'(i); rb = 6'(DEPTH - 1 - i);
      @(negedge clk);   // data registered at the edge in between
      checks += 2;
      if (da !== model[i])           begin failures++; $display("A[%0d]=%0d exp %0d", i, da, model[i]); end
      if (db !== model[DEPTH-1-i])   begin failures++; $display("B[%0d]=%0d", DEPTH-1-i, db); end
    end
    // overwrite one word and read it the next cycle
    @(negedge clk); we = 1; waddr = 6'd5; wdata = 16'sd1234; model[5] = wdata; ra = 6'd5;
    @(negedge clk); we = 0;
    @(negedge clk); checks++; if (da !== 16'sd1234) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
