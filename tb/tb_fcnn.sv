// tb_fcnn: the network engine at its full size (6-128-64-32-2). Loads
// random weights and biases through the write ports, runs several input
// vectors and compares both output logits with a layer-by-layer reference
// forward pass; checks the latency NMAC + 2*(layers-1) + 3 cycles and that
// a start while busy is ignored.
module tb_fcnn;
  import squad_pkg::*;
  import squad_ref_pkg::*;

  localparam int N_IN = 6, H1 = 128, H2 = 64, H3 = 32, N_OUT = 2;
  localparam int NW = N_IN*H1 + H1*H2 + H2*H3 + H3*N_OUT;
  localparam int NB = H1 + H2 + H3 + N_OUT;
  localparam int LAT = NW + 2*3 + 3;

  logic clk = 0, rst_n = 0;
  logic w_we, b_we, start, busy, out_valid;
  logic [$clog2(NW)-1:0] w_waddr;
  logic [$clog2(NB)-1:0] b_waddr;
  act_t w_wdata, b_wdata;
  act_t x [N_IN];
  act_t z [N_OUT];
  int w [], b [], sizes [];
  int checks = 0, failures = 0;

  fcnn dut (.clk, .rst_n, .w_we, .w_waddr, .w_wdata, .b_we, .b_waddr, .b_wdata,
    .start, .x, .busy, .out_valid, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; b_we = 0; w_waddr = 0; b_waddr = 0; w_wdata = 0; b_wdata = 0; start = 0;
    foreach (x[i]) x[i] = 0;
    sizes = '{N_IN, H1, H2, H3, N_OUT};
    w = new[NW]; b = new[NB];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NW; i++) begin
      // spread of +-0.5 in the first layer (inputs are larger), +-0.25 later
      w[i] = (i < N_IN*H1) ? int'($urandom_range(0, 256)) - 128 : int'($urandom_range(0, 128)) - 64;
      @(negedge clk); w_we = 1; w_waddr = $bits(w_waddr)'(i); w_wdata = act_t'(w[i]);
    end
    @(negedge clk); w_we = 0;
    for (int i = 0; i < NB; i++) begin
      b[i] = int'($urandom_range(0, 512)) - 256;
      @(negedge clk); b_we = 1; b_waddr = $bits(b_waddr)'(i); b_wdata = act_t'(b[i]);
    end
    @(negedge clk); b_we = 0;
    for (int n = 0; n < 6; n++) begin
      int xi [], ze [];
      int lat;
      xi = new[N_IN];
      foreach (xi[i]) xi[i] = int'($urandom_range(0, 1024)) - 512;
      if (n == 5) foreach (xi[i]) xi[i] = (i % 2) ? 32767 : -32768;   // extreme inputs
      nn_ref(xi, w, b, sizes, ze);
      @(negedge clk);
      start = 1; foreach (x[i]) x[i] = act_t'(xi[i]);
      @(negedge clk);
      start = 0;
      lat = 1;
      repeat (10) @(negedge clk);
      // a second start while busy must be ignored
      start = 1; foreach (x[i]) x[i] = 0; @(negedge clk); start = 0; lat += 11;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks += 3;
      if (lat !== LAT) begin failures++; $display("latency %0d exp %0d", lat, LAT); end
      if (int'(z[0]) !== ze[0] || int'(z[1]) !== ze[1]) begin
        failures += 2; $display("n=%0d z=%0d,%0d exp %0d,%0d", n, z[0], z[1], ze[0], ze[1]);
      end
      @(negedge clk);
      checks++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
