// squad_csr: host register bank of the detection pipeline.
//
// In the paper the ARM processor of the RFSoC, running the Python control
// software, programs the FPGA logic and collects results. This block is the
// programmable-logic side of that link: a simple word-addressed register
// bus (write strobe, read strobe, 16-bit address, 32-bit data) such as an
// AXI-Lite bridge would drive. Address map (squad_pkg):
//   0x0000-0x003F  configuration registers (cfg_t), read/write
//   0x0040-0x0046  counters and status, read only
//   0x0800+        samples of the last captured detection (event buffer)
//   0x1000+        bins of the maximum-value histogram
//   0x4000+        network weights, write only (forwarded to the engine)
//   0x8000+        network biases, write only
// Writing REG_CTRL with bit 4 (hist_clr) or bit 6 (cnt_clr) set gives a
// one-cycle clear pulse; those bits are not stored.
// Reset values: threshold 1500 (threshold line of the paper's raw-data
// plot), calibration reference 3400 (the paper's photon reference basis),
// calibration gain 1.0, bias setting 70 (0.07 mA in uA, the paper's
// operating bias), elimination on, trigger off, window always open, input
// offsets 0 and gains 1 (Q8). The bus protocol and map are this design's.
// Timing: writes take effect the cycle after wr_en; rd_data is valid the
// cycle after rd_en (rd_valid).
// The weight/bias write address and data and the event-buffer and histogram
// read addresses are slices of the bus address and data, passed on without
// a register; only the strobes are decoded.
module squad_csr
  import squad_pkg::*;
#(
  parameter int unsigned WIN   = 512,
  parameter int unsigned NBINS = 256,
  parameter int unsigned NW    = 11072,
  parameter int unsigned NB    = 226,
  localparam int unsigned EAW  = $clog2(WIN),
  localparam int unsigned HBW  = $clog2(NBINS),
  localparam int unsigned WAW  = $clog2(NW),
  localparam int unsigned BAW  = $clog2(NB)
) (
  input  logic            clk,
  input  logic            rst_n,
  // host bus
  input  logic            wr_en,
  input  logic            rd_en,
  input  logic [15:0]     addr,
  input  logic [31:0]     wr_data,
  output logic [31:0]     rd_data,
  output logic            rd_valid,
  // configuration and status
  output cfg_t            cfg,
  output logic            hist_clr,
  output logic            cnt_clr,
  input  status_t         status,
  // event buffer and histogram read ports
  output logic [EAW-1:0]  evbuf_raddr,
  input  sample_t         evbuf_rdata,   // one cycle after evbuf_raddr
  output logic [HBW-1:0]  hist_rbin,
  input  logic [15:0]     hist_rcount,   // combinational on hist_rbin
  // network parameter writes
  output logic            w_we,
  output logic [WAW-1:0]  w_waddr,
  output act_t            w_wdata,
  output logic            b_we,
  output logic [BAW-1:0]  b_waddr,
  output act_t            b_wdata
);

  logic [31:0] reg_q;
  logic        sel_ev_q;

  function automatic logic in_range(input logic [15:0] a, input logic [15:0] base, input int unsigned n);
    return (a >= base) && (32'(a) < 32'(base) + n);
  endfunction

  assign evbuf_raddr = EAW'(addr - REG_EVBUF0);
  assign hist_rbin   = HBW'(addr - REG_HIST0);
  assign w_we    = wr_en && in_range(addr, WEIGHT0, NW);
  assign w_waddr = WAW'(addr - WEIGHT0);
  assign w_wdata = act_t'(wr_data[15:0]);
  assign b_we    = wr_en && in_range(addr, BIAS0, NB);
  assign b_waddr = BAW'(addr - BIAS0);
  assign b_wdata = act_t'(wr_data[15:0]);

  // ---------------- writes ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg              <= '0;
      cfg.elim_en      <= 1'b1;
      cfg.mode         <= MODE_DARK_ELIM;
      cfg.win_len      <= '1;
      cfg.threshold    <= 16'sd1500;
      cfg.cal_ref      <= 16'sd3400;
      cfg.cal_gain     <= 16'sd256;
      cfg.bias_setting <= 16'sd70;
      for (int i = 0; i < N_FEAT; i++) cfg.norm_gain[i] <= 16'sd1;
      hist_clr         <= 1'b0;
      cnt_clr          <= 1'b0;
    end else begin
      hist_clr <= 1'b0;
      cnt_clr  <= 1'b0;
      if (wr_en) begin
        unique case (addr)
          REG_CTRL: begin
            cfg.trig_en      <= wr_data[0];
            cfg.elim_en      <= wr_data[1];
            cfg.mode         <= mode_e'(wr_data[2]);
            cfg.hist_en      <= wr_data[3];
            hist_clr         <= wr_data[4];
            cfg.use_hist_ref <= wr_data[5];
            cnt_clr          <= wr_data[6];
          end
          REG_PERIOD:    cfg.period       <= wr_data;
          REG_PULSE_W:   cfg.pulse_w      <= wr_data;
          REG_WIN_DELAY: cfg.win_delay    <= wr_data;
          REG_WIN_LEN:   cfg.win_len      <= wr_data;
          REG_THRESH:    cfg.threshold    <= sample_t'(wr_data[15:0]);
          REG_CAL_REF:   cfg.cal_ref      <= sample_t'(wr_data[15:0]);
          REG_CAL_GAIN:  cfg.cal_gain     <= sample_t'(wr_data[15:0]);
          REG_BIAS:      cfg.bias_setting <= sample_t'(wr_data[15:0]);
          default: begin
            for (int i = 0; i < N_FEAT; i++) begin
              if (addr == REG_NORM_OFF0  + 16'(i)) cfg.norm_off[i]  <= sample_t'(wr_data[15:0]);
              if (addr == REG_NORM_GAIN0 + 16'(i)) cfg.norm_gain[i] <= sample_t'(wr_data[15:0]);
            end
          end
        endcase
      end
    end
  end

  // ---------------- reads ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_q    <= '0;
      sel_ev_q <= 1'b0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        sel_ev_q <= in_range(addr, REG_EVBUF0, WIN);
        reg_q    <= '0;
        unique case (addr)
          REG_CTRL:       reg_q <= {26'd0, cfg.use_hist_ref, 1'b0, cfg.hist_en,
                                    cfg.mode == MODE_FEATURE, cfg.elim_en, cfg.trig_en};
          REG_PERIOD:     reg_q <= cfg.period;
          REG_PULSE_W:    reg_q <= cfg.pulse_w;
          REG_WIN_DELAY:  reg_q <= cfg.win_delay;
          REG_WIN_LEN:    reg_q <= cfg.win_len;
          REG_THRESH:     reg_q <= 32'(cfg.threshold);
          REG_CAL_REF:    reg_q <= 32'(cfg.cal_ref);
          REG_CAL_GAIN:   reg_q <= 32'(cfg.cal_gain);
          REG_BIAS:       reg_q <= 32'(cfg.bias_setting);
          REG_PHOTONS:    reg_q <= status.cnt_cls1;
          REG_DARKS:      reg_q <= status.cnt_cls0;
          REG_MISSED:     reg_q <= status.cnt_missed;
          REG_HIST_MODE:  reg_q <= {status.hist_mode_count, status.hist_mode_bin};
          REG_HIST_TOTAL: reg_q <= status.hist_total;
          REG_STATUS:     reg_q <= {30'd0, status.hist_busy, status.busy};
          REG_REMOVED:    reg_q <= status.cnt_removed;
          default: begin
            for (int i = 0; i < N_FEAT; i++) begin
              if (addr == REG_NORM_OFF0  + 16'(i)) reg_q <= 32'(cfg.norm_off[i]);
              if (addr == REG_NORM_GAIN0 + 16'(i)) reg_q <= 32'(cfg.norm_gain[i]);
            end
            if (in_range(addr, REG_HIST0, NBINS)) reg_q <= {16'd0, hist_rcount};
          end
        endcase
      end
    end
  end

  assign rd_data = sel_ev_q ? 32'(evbuf_rdata) : reg_q;

endmodule
