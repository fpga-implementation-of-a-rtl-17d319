// hidden_layer -- the hidden layer of the network: a single McCulloch-Pitts
// neuron whose net input is the weighted sum of the normalised samples plus a
// bias, u1 = sum_i IW1[i] * xn[i] + B1.
//
// The paper's block diagram gives the input weights IW1 as a 1 x m row and the
// bias b1 as 1 x 1, i.e. one hidden neuron fed by all m = 9 samples; its
// activation is applied by the following activation_lut stage. The products
// are summed at full precision, the sum is truncated from W_FRAC + DATA_FRAC
// to DATA_FRAC fraction bits, the bias (Q.DATA_FRAC) is added and the result
// saturated. The sign of the bias (the paper's "+/- theta") is carried by B1.
//
// Interface: xn[i] normalised samples, u1 neuron net input, both Q.DATA_FRAC.
// Timing: one register stage (stage 2 of 5); u1 holds while in_valid is low.
module hidden_layer
  import ann_pkg::*;
#(
  parameter int    N_INPUTS = N_SAMPLES,
  parameter coef_t IW1 [N_INPUTS] = DEF_IW1,
  parameter coef_t B1  = DEF_B1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t xn [N_INPUTS],
  output logic  out_valid,
  output data_t u1
);

  longint acc;

  always_comb begin
    acc = 0;
    for (int i = 0; i < N_INPUTS; i++)
      acc += longint'(IW1[i]) * longint'(xn[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      u1        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) u1 <= sat_data((acc >>> W_FRAC) + longint'(B1));
    end
  end

endmodule
