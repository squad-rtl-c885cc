// event_buffer: sample memory of one detection.
//
// A simple dual-read memory of DEPTH signed samples. The background filter
// writes the captured window through port W; the feature extractor reads it
// on port A and the host reads it on port B (training data, the "target
// data" of the paper's workflow). Both reads are synchronous: data appears
// one cycle after the address. Contents are not reset.
//
// The paper says the samples of each detection are held in RAM for the next
// processing step; the depth and the two read ports are this design's
// choices. Maps to block RAM (or two copies of it) on an FPGA.
module event_buffer
  import squad_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  sample_t       wdata,
  input  logic [AW-1:0] raddr_a,
  output sample_t       rdata_a,
  input  logic [AW-1:0] raddr_b,
  output sample_t       rdata_b
);

  sample_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end

endmodule
