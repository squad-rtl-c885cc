// noise_filter: threshold background filter and detection capture.
//
// The SNSPD readout is a stream of ADC samples that is mostly background
// noise, with short pulses where a photon (or a dark count) was detected.
// Following the paper, a fixed threshold separates the two: a detection
// starts when a sample inside the detection window rises to or above
// `threshold` while the previous sample was below it. The filter then
// writes WIN samples into the event buffer, starting PRE samples before the
// crossing (a PRE-deep delay line keeps the leading edge), and meanwhile
// records the maximum sample, its index and the first and last indices at
// or above the threshold. At the end it presents an event_info_t with the
// time tag latched at the crossing (ev_valid, one cycle) and holds the
// buffer until `release_buf` is pulsed by the stage that read it.
// Crossings that arrive while capturing or holding are counted through the
// one-cycle `missed` pulse; such detections are lost.
//
// From the paper: the threshold approach and the features it prepares
// (maximum value and the rising/falling edge). The default threshold 1500
// is where the threshold line of the paper's raw-data plot is drawn. Window
// length, pre-trigger depth, the rising-edge rule and the hold/release
// handshake are this design's choices.
// Timing: one sample per cycle when s_valid; ev_valid is high in the cycle
// in which the last of the WIN samples is being written, so a reader that
// starts at index 0 on ev_valid always sees the complete window.
// ev_info.start_idx is always PRE (the crossing sits PRE samples into the
// window); it is kept in the summary so that later stages need not know PRE.
module noise_filter
  import squad_pkg::*;
#(
  parameter int unsigned WIN   = 512,
  parameter int unsigned PRE   = 16,
  localparam int unsigned AW   = $clog2(WIN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            s_valid,
  input  sample_t         s_data,
  input  logic            window,
  input  logic [TS_W-1:0] tstamp,
  input  sample_t         threshold,
  // event buffer write port
  output logic            buf_we,
  output logic [AW-1:0]   buf_waddr,
  output sample_t         buf_wdata,
  // detection summary
  output logic            ev_valid,
  output event_info_t     ev_info,
  input  logic            release_buf,
  output logic            busy,
  output logic            missed
);

  typedef enum logic [1:0] {S_IDLE, S_CAPTURE, S_HOLD} state_e;
  state_e state;

  sample_t dly [PRE];      // dly[PRE-1] is the sample PRE cycles old
  sample_t prev;
  sample_t delayed;
  logic    crossing;
  logic [AW-1:0] idx;
  event_info_t   info;

  assign delayed  = dly[PRE-1];
  assign crossing = s_valid && window && (s_data >= threshold) && (prev < threshold);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PRE; i++) dly[i] <= '0;
      prev <= '0;
    end else if (s_valid) begin
      dly[0] <= s_data;
      for (int i = 1; i < PRE; i++) dly[i] <= dly[i-1];
      prev <= s_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      info      <= '0;
      ev_valid  <= 1'b0;
      ev_info   <= '0;
      buf_we    <= 1'b0;
      buf_waddr <= '0;
      buf_wdata <= '0;
      missed    <= 1'b0;
    end else begin
      ev_valid <= 1'b0;
      buf_we   <= 1'b0;
      missed   <= crossing && (state != S_IDLE);
      unique case (state)
        S_IDLE: if (crossing) begin
          state        <= S_CAPTURE;
          idx          <= AW'(1);
          buf_we       <= 1'b1;
          buf_waddr    <= '0;
          buf_wdata    <= delayed;
          info.tstamp  <= tstamp;
          info.vmax    <= delayed;
          info.peak_idx <= '0;
          // the crossing sample lands at index PRE
          info.start_idx <= 16'(PRE);
          info.end_idx   <= 16'(PRE);
        end
        S_CAPTURE: if (s_valid) begin
          buf_we    <= 1'b1;
          buf_waddr <= idx;
          buf_wdata <= delayed;
          if (delayed > info.vmax) begin
            info.vmax     <= delayed;
            info.peak_idx <= 16'(idx);
          end
          if (delayed >= threshold && 16'(idx) > 16'(PRE)) info.end_idx <= 16'(idx);
          if (idx == AW'(WIN-1)) begin
            state <= S_HOLD;
            ev_valid <= 1'b1;
            ev_info  <= info;
            if (delayed > info.vmax) begin
              ev_info.vmax     <= delayed;
              ev_info.peak_idx <= 16'(idx);
            end
            if (delayed >= threshold) ev_info.end_idx <= 16'(idx);
          end
          idx <= idx + 1'b1;
        end
        S_HOLD: if (release_buf) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
