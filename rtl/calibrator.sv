// calibrator: per-detection interference calibration factor.
//
// The paper observes that detections of the same kind differ in height and
// width because of the electronics and small temperature drifts, and gives
// the classifier a calibration factor per detection, a linear function of
// the detection maximum and of the most probable maximum of the
// distribution (the reference basis). This block computes
//     factor = sat16(((vmax - ref) * gain) >>> 8)
// with `gain` a signed Q8 slope set by the host, and `ref` either the
// host-set reference (default 3400, the paper's photon reference) or the
// running mode of the max histogram. The exact linear form is this
// design's choice: the paper gives only factor = f(p_max, v_max).
// Timing: one cycle from in_valid to out_valid; features pass alongside.
module calibrator
  import squad_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  features_t in_feat,
  input  sample_t   ref_value,
  input  sample_t   gain,
  output logic      out_valid,
  output features_t out_feat,
  output sample_t   factor
);

  logic signed [SAMPLE_W:0]       dv;
  logic signed [2*SAMPLE_W:0]     prod;
  logic signed [2*SAMPLE_W:0]     scaled;

  assign dv     = {in_feat.vmax[SAMPLE_W-1], in_feat.vmax} - {ref_value[SAMPLE_W-1], ref_value};
  assign prod   = dv * gain;
  assign scaled = prod >>> FRAC_BITS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_feat  <= '0;
      factor    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_feat <= in_feat;
        if (scaled > 32767)       factor <= 16'sh7fff;
        else if (scaled < -32768) factor <= 16'sh8000;
        else                      factor <= sample_t'(scaled);
      end
    end
  end

endmodule
