// nn_input_prep: classifier input vector and its fixed-point scaling.
//
// The paper's classifier takes three groups of inputs: the Deliverable
// (the voltage-versus-time features of the detection plus its calibration
// factor), the Setting (the SNSPD bias current) and the Entry (the class
// being learned, which at inference is the output, not an input). This
// block assembles
//   x[0] = maximum, x[1] = FWHM, x[2] = rise time, x[3] = fall time,
//   x[4] = calibration factor, x[5] = bias-current setting (host register)
// and scales each entry to the network's Q7.8 format with host-set offset
// and gain: q[i] = sat16((x[i] - off[i]) * gain[i]), where a gain of g
// means a real scale of g/256 per input unit. This is the data preparation
// the paper's processing module performs before the network; the scaling
// rule is this design's choice (offset/gain come from off-line training).
// Timing: one cycle from in_valid to out_valid.
module nn_input_prep
  import squad_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  features_t in_feat,
  input  sample_t   factor,
  input  sample_t   bias_setting,
  input  sample_t   off  [N_FEAT],
  input  sample_t   gain [N_FEAT],
  output logic      out_valid,
  output act_t      x    [N_FEAT],
  output logic [TS_W-1:0] out_tstamp
);

  sample_t raw [N_FEAT];

  always_comb begin
    raw[0] = in_feat.vmax;
    raw[1] = sample_t'(in_feat.fwhm);
    raw[2] = sample_t'(in_feat.rise);
    raw[3] = sample_t'(in_feat.fall);
    raw[4] = factor;
    raw[5] = bias_setting;
  end

  function automatic act_t scale(input sample_t v, input sample_t o, input sample_t g);
    logic signed [SAMPLE_W:0]     d;
    logic signed [2*SAMPLE_W+1:0] p;
    d = {v[SAMPLE_W-1], v} - {o[SAMPLE_W-1], o};
    p = d * g;
    if (p > 32767)       return 16'sh7fff;
    else if (p < -32768) return 16'sh8000;
    else                 return act_t'(p);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_tstamp <= '0;
      for (int i = 0; i < N_FEAT; i++) x[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tstamp <= in_feat.tstamp;
        for (int i = 0; i < N_FEAT; i++) x[i] <= scale(raw[i], off[i], gain[i]);
      end
    end
  end

endmodule
