// fcnn: fully connected classifier network, one multiply-accumulate per cycle.
//
// The network of the paper: N_IN inputs, three hidden layers of H1 = 128,
// H2 = 64 and H3 = 32 neurons with sigmoid activation, and an output layer
// of N_OUT = 2 neurons (the two classes) whose values go to the softmax.
// Each neuron computes
//     pre = sat16((sum_i w[i] * a[i]) >>> 8 + b),   a, w, b in Q7.8
// followed by sigmoid_unit in the hidden layers and nothing in the output
// layer (the logits are returned).
//
// Organisation (this design's choice): a single multiplier walks through
// all weights in storage order - layer by layer, neuron by neuron, input by
// input - so the weight address is just a running counter and the bias
// address counts neurons. Weight layout: layer l starts after all weights
// of earlier layers; inside it, weight (o, i) is at o * n_in(l) + i. Biases
// are stored neuron after neuron, layer after layer. Two activation
// buffers take turns as layer input and output. A three-stage pipeline
// (address, multiply-accumulate, bias + activation + write-back) processes
// one weight per cycle without gaps between neurons; two idle cycles
// separate layers so that the last result of a layer is written before the
// next layer reads it.
// Latency from start to out_valid: NMAC + 2*(NLAYER-1) + 3 cycles, with
// NMAC the total number of weights (11072 at the defaults with 6 inputs).
// start is ignored while busy. Weights/biases are loaded through the
// host write ports, which feed two nn_weight_ram instances.
module fcnn
  import squad_pkg::*;
#(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned H1    = 128,
  parameter int unsigned H2    = 64,
  parameter int unsigned H3    = 32,
  parameter int unsigned N_OUT = 2,
  localparam int unsigned NLAYER = 4,
  localparam int unsigned NW   = N_IN*H1 + H1*H2 + H2*H3 + H3*N_OUT,
  localparam int unsigned NB   = H1 + H2 + H3 + N_OUT,
  localparam int unsigned WAW  = $clog2(NW),
  localparam int unsigned BAW  = $clog2(NB),
  localparam int unsigned M01  = (N_IN > H1) ? N_IN : H1,
  localparam int unsigned M23  = (H2 > H3) ? H2 : H3,
  localparam int unsigned MAXN = (M01 > M23) ? M01 : M23
) (
  input  logic           clk,
  input  logic           rst_n,
  // parameter loading
  input  logic           w_we,
  input  logic [WAW-1:0] w_waddr,
  input  act_t           w_wdata,
  input  logic           b_we,
  input  logic [BAW-1:0] b_waddr,
  input  act_t           b_wdata,
  // inference
  input  logic           start,
  input  act_t           x [N_IN],
  output logic           busy,
  output logic           out_valid,
  output act_t           z [N_OUT]
);

  localparam int unsigned ACC_W = 2*ACT_W + $clog2(MAXN) + 1;
  localparam int unsigned NIW   = $clog2(MAXN);
  localparam int unsigned OW    = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  function automatic int unsigned n_in_of(input int unsigned l);
    case (l)
      0: return N_IN;
      1: return H1;
      2: return H2;
      default: return H3;
    endcase
  endfunction
  function automatic int unsigned n_out_of(input int unsigned l);
    case (l)
      0: return H1;
      1: return H2;
      2: return H3;
      default: return N_OUT;
    endcase
  endfunction

  // ---------------- parameter memories ----------------
  logic [WAW-1:0] w_raddr;
  logic [BAW-1:0] b_raddr;
  act_t           w_rdata, b_rdata;

  nn_weight_ram #(.DEPTH(NW)) u_wram (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata), .raddr(w_raddr), .rdata(w_rdata));
  nn_weight_ram #(.DEPTH(NB)) u_bram (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata), .raddr(b_raddr), .rdata(b_rdata));

  // ---------------- activation buffers ----------------
  act_t buf0 [MAXN];
  act_t buf1 [MAXN];

  // ---------------- stage 0: address generation ----------------
  logic        running;
  logic [1:0]  layer;
  logic [NIW-1:0] o_cnt;
  logic [NIW-1:0] i_cnt;
  logic [1:0]  gap;
  logic        s1_valid, s1_first, s1_last;
  logic [NIW-1:0] s1_i, s1_o;
  logic [1:0]  s1_l;

  // ---------------- stage 1/2 ----------------
  logic signed [ACC_W-1:0] acc, acc_sum, s2_acc;
  logic signed [2*ACT_W-1:0] prod;
  act_t        a_in;
  logic        s2_valid;
  logic [NIW-1:0] s2_o;
  logic [1:0]  s2_l;
  act_t        s2_bias;
  logic signed [ACC_W-1:0] pre_wide;
  act_t        pre, act_y, result;

  assign busy = running || s1_valid || s2_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      layer    <= '0;
      o_cnt    <= '0;
      i_cnt    <= '0;
      gap      <= '0;
      w_raddr  <= '0;
      b_raddr  <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_i     <= '0;
      s1_o     <= '0;
      s1_l     <= '0;
    end else begin
      s1_valid <= 1'b0;
      if (start && !busy) begin
        running <= 1'b1;
        layer   <= '0;
        o_cnt   <= '0;
        i_cnt   <= '0;
        gap     <= '0;
        w_raddr <= '0;
        b_raddr <= '0;
      end else if (running) begin
        if (gap != 0) begin
          gap <= gap - 1'b1;
        end else begin
          // issue weight (layer, o_cnt, i_cnt); addresses already point at it
          s1_valid <= 1'b1;
          s1_first <= (i_cnt == 0);
          s1_last  <= (32'(i_cnt) == n_in_of(32'(layer)) - 1);
          s1_i     <= i_cnt;
          s1_o     <= o_cnt;
          s1_l     <= layer;
          if (32'(i_cnt) == n_in_of(32'(layer)) - 1) begin
            i_cnt <= '0;
            if (32'(o_cnt) == n_out_of(32'(layer)) - 1) begin
              o_cnt <= '0;
              if (32'(layer) == NLAYER - 1) running <= 1'b0;
              else begin
                layer <= layer + 1'b1;
                gap   <= 2'd2;
              end
            end else begin
              o_cnt <= o_cnt + 1'b1;
            end
          end else begin
            i_cnt <= i_cnt + 1'b1;
          end
        end
        // address of the next weight/bias, valid when it is issued
        if (gap == 0) begin
          if (32'(w_raddr) != NW - 1) w_raddr <= w_raddr + 1'b1;
          if (32'(i_cnt) == n_in_of(32'(layer)) - 1 && 32'(b_raddr) != NB - 1)
            b_raddr <= b_raddr + 1'b1;
        end
      end
    end
  end

  // stage 1: multiply-accumulate (w_rdata/b_rdata belong to the issued weight)
  assign a_in    = s1_l[0] ? buf1[s1_i] : buf0[s1_i];
  assign prod    = w_rdata * a_in;
  assign acc_sum = (s1_first ? '0 : acc) + ACC_W'(prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      s2_valid <= 1'b0;
      s2_acc   <= '0;
      s2_o     <= '0;
      s2_l     <= '0;
      s2_bias  <= '0;
    end else begin
      s2_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        acc <= acc_sum;
        if (s1_last) begin
          s2_acc  <= acc_sum;
          s2_o    <= s1_o;
          s2_l    <= s1_l;
          s2_bias <= b_rdata;
        end
      end
    end
  end

  // stage 2: bias, activation, write-back
  sigmoid_unit u_sig (.x(pre), .y(act_y));

  always_comb begin
    pre_wide = (s2_acc >>> FRAC_BITS) + ACC_W'(s2_bias);
    if (pre_wide > 32767)       pre = 16'sh7fff;
    else if (pre_wide < -32768) pre = 16'sh8000;
    else                        pre = act_t'(pre_wide);
    result = (32'(s2_l) == NLAYER - 1) ? pre : act_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < N_OUT; k++) z[k] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (s2_valid && 32'(s2_l) == NLAYER - 1) begin
        z[OW'(s2_o)] <= pre;
        if (32'(s2_o) == N_OUT - 1) out_valid <= 1'b1;
      end
    end
  end

  // activation buffers: inputs loaded at start, layer outputs written back
  always_ff @(posedge clk) begin
    if (start && !busy) begin
      for (int k = 0; k < N_IN; k++) buf0[k] <= x[k];
    end else if (s2_valid && 32'(s2_l) != NLAYER - 1) begin
      if (s2_l[0]) buf0[s2_o] <= result;
      else         buf1[s2_o] <= result;
    end
  end

endmodule
