// softmax_decide: softmax and arg-max over the two network outputs.
//
// The paper applies a softmax to the output layer and takes the arg-max as
// the predicted class (photon = 1, dark count = 0, or the two values of the
// feature being recognised). For two classes the softmax probability of
// class 1 is exactly sigmoid(z1 - z0), so this block returns
//   cls   = (z1 > z0)            (ties go to class 0)
//   score = sigmoid(sat16(z1 - z0)) in Q7.8, the probability of class 1
// using the same piecewise-linear sigmoid as the hidden layers (an
// approximation; the class decision itself is exact).
// Timing: one cycle from in_valid to out_valid; tstamp passes alongside.
module softmax_decide
  import squad_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  act_t            z0,
  input  act_t            z1,
  input  logic [TS_W-1:0] in_tstamp,
  output logic            out_valid,
  output logic            cls,
  output act_t            score,
  output logic [TS_W-1:0] out_tstamp
);

  logic signed [ACT_W:0] d;
  act_t dsat, sig;

  assign d    = {z1[ACT_W-1], z1} - {z0[ACT_W-1], z0};
  assign dsat = (d > 32767) ? 16'sh7fff : (d < -32768) ? 16'sh8000 : act_t'(d);

  sigmoid_unit u_sig (.x(dsat), .y(sig));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      cls        <= 1'b0;
      score      <= '0;
      out_tstamp <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        cls        <= (z1 > z0);
        score      <= sig;
        out_tstamp <= in_tstamp;
      end
    end
  end

endmodule
