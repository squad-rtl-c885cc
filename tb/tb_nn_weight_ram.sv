// tb_nn_weight_ram: writes random parameters, reads them back with the
// one-cycle latency, and checks that writes past DEPTH are ignored.
module tb_nn_weight_ram;
  import squad_pkg::*;

  localparam int DEPTH = 100;
  logic clk = 0;
  logic we;
  logic [6:0] waddr, raddr;
  act_t wdata, rdata;
  act_t model [DEPTH];
  int checks = 0, failures = 0;

  nn_weight_ram #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = act_t'($urandom_range(0, 65535)); model[i] = wdata;
    end
    // out-of-range writes must not alias into the array
    for (int i = DEPTH; i < 128; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = 16'sh5a5a;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3 * DEPTH; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); raddr = 7'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("w[%0d]=%0d exp %0d", a, rdata, model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
