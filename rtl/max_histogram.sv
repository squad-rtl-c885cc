// max_histogram: distribution of detection maxima and its most probable value.
//
// The paper calibrates its data against a reference basis: the most
// probable maximum value in the histogram of the per-detection maxima
// (3400 ADC codes for photons, 3800 for dark counts in its data). This
// block builds that histogram on line. Each `in_valid` value is placed in
// bin clamp(value >> BIN_SHIFT, 0, NBINS-1) (negative values in bin 0),
// whose count is incremented (saturating at 2^CNT_BITS-1). Because counts
// only grow, the mode is tracked exactly by comparing each updated count
// with the current best; ties keep the earlier mode. `ref_value` is the
// centre of the mode bin and is offered to the calibrator as reference.
// `clear` sweeps all bins to zero in NBINS cycles (busy high meanwhile;
// inputs during the sweep are ignored). Bin width, bin count and counter
// width are this design's choices.
// ref_value's low BIN_SHIFT bits are the constant half-bin offset.
// Timing: one value per cycle; mode outputs are valid the cycle after.
module max_histogram
  import squad_pkg::*;
#(
  parameter int unsigned NBINS     = 256,
  parameter int unsigned BIN_SHIFT = 5,
  parameter int unsigned CNT_BITS  = 16,
  localparam int unsigned BW       = $clog2(NBINS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  sample_t             in_value,
  output logic [BW-1:0]       mode_bin,
  output logic [CNT_BITS-1:0] mode_count,
  output logic [31:0]         total,
  output sample_t             ref_value,
  output logic                busy,
  // host read of one bin (combinational)
  input  logic [BW-1:0]       rd_bin,
  output logic [CNT_BITS-1:0] rd_count
);

  logic [CNT_BITS-1:0] counts [NBINS];
  logic                clearing;
  logic [BW-1:0]       clr_idx;
  logic [BW-1:0]       bin;
  logic [CNT_BITS-1:0] cur, nxt;
  sample_t             shifted;

  assign shifted  = in_value >>> BIN_SHIFT;
  assign bin      = (in_value < 0) ? '0 :
                    (shifted > sample_t'(NBINS-1)) ? BW'(NBINS-1) : BW'(shifted);
  assign cur      = counts[bin];
  assign nxt      = (&cur) ? cur : cur + 1'b1;
  assign busy     = clearing;
  assign rd_count = counts[rd_bin];
  assign ref_value = sample_t'((int'(mode_bin) << BIN_SHIFT) + (1 << (BIN_SHIFT - 1)));

  always_ff @(posedge clk) begin
    if (clearing)
      counts[clr_idx] <= '0;
    else if (in_valid)
      counts[bin] <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing   <= 1'b1;      // contents are cleared after reset
      clr_idx    <= '0;
      mode_bin   <= '0;
      mode_count <= '0;
      total      <= '0;
    end else if (clear && !clearing) begin
      clearing   <= 1'b1;
      clr_idx    <= '0;
      mode_bin   <= '0;
      mode_count <= '0;
      total      <= '0;
    end else if (clearing) begin
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == BW'(NBINS-1)) clearing <= 1'b0;
    end else if (in_valid) begin
      total <= total + 1'b1;
      if (nxt > mode_count) begin
        mode_bin   <= bin;
        mode_count <= nxt;
      end
    end
  end

endmodule
