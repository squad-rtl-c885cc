// squad_pkg: types and constants shared by the photon-detection pipeline.
//
// Samples from the RF ADC are carried as 16-bit signed integers (ADC codes,
// the scale of the paper's plots, which reach about 4200). Network
// activations are 16-bit signed fixed point with FRAC_BITS fractional bits
// (Q7.8). The register map of the host interface (squad_csr) is defined
// here so that the top, the register bank and the testbenches agree on it.
// All widths and the fixed-point format are this design's choices; the
// paper gives no word lengths.
package squad_pkg;

  localparam int unsigned SAMPLE_W  = 16;
  localparam int unsigned ACT_W     = 16;
  localparam int unsigned FRAC_BITS = 8;
  localparam int unsigned TS_W      = 32;
  localparam int unsigned CNT_W     = 32;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [ACT_W-1:0]    act_t;


  // Summary of one captured detection, produced by the background filter.
  typedef struct packed {
    sample_t          vmax;       // largest sample of the detection
    logic [15:0]      peak_idx;   // buffer index of that sample
    logic [15:0]      start_idx;  // first index at or above the threshold
    logic [15:0]      end_idx;    // last index at or above the threshold
    logic [TS_W-1:0]  tstamp;     // samples since the laser trigger at the crossing
  } event_info_t;

  // Waveform features handed to the classifier (Deliverable category).
  typedef struct packed {
    sample_t          vmax;
    logic [15:0]      fwhm;       // samples at or above half maximum (first..last)
    logic [15:0]      rise;       // samples from threshold crossing to peak
    logic [15:0]      fall;       // samples from peak to last sample above threshold
    logic [TS_W-1:0]  tstamp;
  } features_t;

  // What the feedback module does with a classified detection.
  typedef enum logic [0:0] {
    MODE_DARK_ELIM = 1'b0,   // class 0 = dark count, dropped when elimination is on
    MODE_FEATURE   = 1'b1    // binary feature recognition, every detection passed with its label
  } mode_e;

  // Number of entries of the classifier input vector:
  // vmax, fwhm, rise, fall, calibration factor, bias-current setting.
  localparam int unsigned N_FEAT = 6;

  // ---------------- host register map (word addresses) ----------------
  localparam logic [15:0] REG_CTRL       = 16'h000; // [0] trig_en [1] elim_en [2] mode [3] hist_en [4] hist_clr [5] use_hist_ref [6] cnt_clr
  localparam logic [15:0] REG_PERIOD     = 16'h001; // trigger period in samples
  localparam logic [15:0] REG_PULSE_W    = 16'h002; // trigger pulse width
  localparam logic [15:0] REG_WIN_DELAY  = 16'h003; // detection window start after trigger
  localparam logic [15:0] REG_WIN_LEN    = 16'h004; // detection window length
  localparam logic [15:0] REG_THRESH     = 16'h005; // background threshold (ADC code)
  localparam logic [15:0] REG_CAL_REF    = 16'h006; // calibration reference basis
  localparam logic [15:0] REG_CAL_GAIN   = 16'h007; // calibration slope (Q8)
  localparam logic [15:0] REG_BIAS       = 16'h008; // bias-current setting fed to the network
  localparam logic [15:0] REG_NORM_OFF0  = 16'h010; // ..+N_FEAT-1: per-input offset
  localparam logic [15:0] REG_NORM_GAIN0 = 16'h020; // ..+N_FEAT-1: per-input gain (Q8)
  localparam logic [15:0] REG_PHOTONS    = 16'h040; // RO: detections classified 1
  localparam logic [15:0] REG_DARKS      = 16'h041; // RO: detections classified 0
  localparam logic [15:0] REG_MISSED     = 16'h042; // RO: crossings lost while busy
  localparam logic [15:0] REG_HIST_MODE  = 16'h043; // RO: [15:0] mode bin, [31:16] its count
  localparam logic [15:0] REG_HIST_TOTAL = 16'h044; // RO: histogram entries
  localparam logic [15:0] REG_STATUS     = 16'h045; // RO: [0] pipeline busy [1] histogram clearing
  localparam logic [15:0] REG_REMOVED    = 16'h046; // RO: detections removed as dark counts
  localparam logic [15:0] REG_EVBUF0     = 16'h0800; // RO: ..+WIN-1, samples of the last detection
  localparam logic [15:0] REG_HIST0      = 16'h1000; // RO: ..+NBINS-1, histogram bins
  localparam logic [15:0] WEIGHT0        = 16'h4000; // WO: ..+NW-1, network weights
  localparam logic [15:0] BIAS0          = 16'h8000; // WO: ..+NB-1, network biases

  // Host-programmable configuration, as held by squad_csr.
  typedef struct packed {
    logic                      trig_en;
    logic                      elim_en;
    mode_e                     mode;
    logic                      hist_en;
    logic                      use_hist_ref;
    logic [TS_W-1:0]           period;
    logic [TS_W-1:0]           pulse_w;
    logic [TS_W-1:0]           win_delay;
    logic [TS_W-1:0]           win_len;
    sample_t                   threshold;
    sample_t                   cal_ref;
    sample_t                   cal_gain;
    sample_t                   bias_setting;
    sample_t [N_FEAT-1:0]      norm_off;
    sample_t [N_FEAT-1:0]      norm_gain;
  } cfg_t;

  // Status the host can read back.
  typedef struct packed {
    logic [CNT_W-1:0] cnt_cls1;
    logic [CNT_W-1:0] cnt_cls0;
    logic [CNT_W-1:0] cnt_removed;
    logic [CNT_W-1:0] cnt_missed;
    logic [15:0]      hist_mode_bin;
    logic [15:0]      hist_mode_count;
    logic [31:0]      hist_total;
    logic             busy;
    logic             hist_busy;
  } status_t;

endpackage
