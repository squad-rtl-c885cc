// nn_weight_ram: parameter memory of the classifier.
//
// The network is trained off line (the paper trains it on a PC and uploads
// the model to the FPGA); its weights and biases are written here by the
// host through the write port and read by the network engine one word per
// cycle. Synchronous read, data one cycle after the address; contents are
// not reset. The same module holds the weights and, as a second instance,
// the biases. Word width (16-bit Q7.8) and depth are this design's choices.
module nn_weight_ram
  import squad_pkg::*;
#(
  parameter int unsigned DEPTH = 11072,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  act_t          wdata,
  input  logic [AW-1:0] raddr,
  output act_t          rdata
);

  act_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (int'(waddr) < DEPTH)) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
