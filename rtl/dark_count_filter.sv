// dark_count_filter: feedback stage - dark-count elimination and counting.
//
// Every classified detection arrives here with its class, score and time
// tag. In MODE_DARK_ELIM the classes mean dark count (0) and photon (1);
// with elimination enabled (elim_en) dark counts are removed from the
// output stream, otherwise every detection is passed so that the result
// with and without elimination can be compared, as the paper does for the
// erbium photoluminescence decay. In MODE_FEATURE (wavelength or
// polarisation recognition) every detection is passed with its label.
// Counters: detections of class 1, of class 0, detections removed, and
// detections lost upstream (missed pulses from the filter). cnt_clr zeroes
// them. Counter widths and the pass-all switch are this design's choices.
// Timing: one cycle from in_valid to out_valid.
module dark_count_filter
  import squad_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  mode_e            mode,
  input  logic             elim_en,
  input  logic             cnt_clr,
  input  logic             in_valid,
  input  logic             in_cls,
  input  act_t             in_score,
  input  logic [TS_W-1:0]  in_tstamp,
  input  logic             missed,
  output logic             out_valid,
  output logic             out_cls,
  output act_t             out_score,
  output logic [TS_W-1:0]  out_tstamp,
  output logic [CNT_W-1:0] cnt_cls1,
  output logic [CNT_W-1:0] cnt_cls0,
  output logic [CNT_W-1:0] cnt_removed,
  output logic [CNT_W-1:0] cnt_missed
);

  logic drop;
  assign drop = (mode == MODE_DARK_ELIM) && elim_en && !in_cls;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_cls     <= 1'b0;
      out_score   <= '0;
      out_tstamp  <= '0;
      cnt_cls1    <= '0;
      cnt_cls0    <= '0;
      cnt_removed <= '0;
      cnt_missed  <= '0;
    end else begin
      out_valid <= in_valid && !drop;
      if (in_valid) begin
        out_cls    <= in_cls;
        out_score  <= in_score;
        out_tstamp <= in_tstamp;
      end
      if (cnt_clr) begin
        cnt_cls1    <= '0;
        cnt_cls0    <= '0;
        cnt_removed <= '0;
        cnt_missed  <= '0;
      end else begin
        if (in_valid &&  in_cls) cnt_cls1    <= cnt_cls1 + 1'b1;
        if (in_valid && !in_cls) cnt_cls0    <= cnt_cls0 + 1'b1;
        if (in_valid &&  drop)   cnt_removed <= cnt_removed + 1'b1;
        if (missed)              cnt_missed  <= cnt_missed + 1'b1;
      end
    end
  end

endmodule
