// feature_extract: waveform features of one captured detection.
//
// The paper feeds the classifier with features of the filtered pulse: its
// maximum value, full width at half maximum (FWHM), and rising and falling
// time. The maximum and the threshold crossings are already known from the
// capture pass (event_info_t); this block makes a second pass over the event
// buffer, reading indices 0..WIN-1 one per cycle, to find the first and last
// sample whose double is at least the maximum (sample >= vmax/2 without
// rounding). It then reports
//   fwhm = last - first + 1            (samples at or above half maximum)
//   rise = peak_idx - start_idx        (threshold crossing to peak)
//   fall = end_idx  - peak_idx         (peak to last sample above threshold)
// each clamped at 0.
// The exact definitions of rise and fall time (threshold to peak rather than
// 10-90 %) are this design's choice; the paper only names the features.
// Timing: start is a one-cycle pulse with the event summary; feat_valid
// pulses WIN+2 cycles later. start is ignored while busy.
module feature_extract
  import squad_pkg::*;
#(
  parameter int unsigned WIN = 512,
  localparam int unsigned AW = $clog2(WIN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  event_info_t   ev_info,
  output logic [AW-1:0] buf_raddr,
  input  sample_t       buf_rdata,
  output logic          feat_valid,
  output features_t     feat,
  output logic          busy
);

  event_info_t   info;
  logic          running, rd_valid, rd_last;
  logic [AW-1:0] rd_idx;
  logic          found;
  logic [15:0]   first_hm, last_hm;
  logic          above;

  assign busy = running || rd_valid;
  // sample >= vmax/2, evaluated without losing the LSB
  assign above = ($signed({buf_rdata, 1'b0}) >= $signed({info.vmax[SAMPLE_W-1], info.vmax}));

  function automatic logic [15:0] diff0(input logic [15:0] a, input logic [15:0] b);
    return (a > b) ? a - b : 16'd0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      info        <= '0;
      running     <= 1'b0;
      rd_valid    <= 1'b0;
      rd_last     <= 1'b0;
      rd_idx      <= '0;
      buf_raddr   <= '0;
      found       <= 1'b0;
      first_hm    <= '0;
      last_hm     <= '0;
      feat_valid  <= 1'b0;
      feat        <= '0;
    end else begin
      feat_valid  <= 1'b0;
      // address phase
      if (start && !busy) begin
        info      <= ev_info;
        running   <= 1'b1;
        buf_raddr <= '0;
        found     <= 1'b0;
      end else if (running) begin
        buf_raddr <= buf_raddr + 1'b1;
        if (buf_raddr == AW'(WIN-1)) running <= 1'b0;
      end
      // data phase: data of address issued last cycle
      rd_valid <= running;
      rd_last  <= running && (buf_raddr == AW'(WIN-1));
      rd_idx   <= buf_raddr;
      if (rd_valid) begin
        if (above) begin
          if (!found) first_hm <= 16'(rd_idx);
          found   <= 1'b1;
          last_hm <= 16'(rd_idx);
        end
        if (rd_last) begin
          feat_valid  <= 1'b1;
          feat.vmax   <= info.vmax;
          feat.tstamp <= info.tstamp;
          feat.rise   <= diff0(info.peak_idx, info.start_idx);
          feat.fall   <= diff0(info.end_idx, info.peak_idx);
          if (above) feat.fwhm <= 16'(rd_idx) - (found ? first_hm : 16'(rd_idx)) + 16'd1;
          else       feat.fwhm <= found ? (last_hm - first_hm + 16'd1) : 16'd0;
        end
      end
    end
  end

endmodule
