// output_layer -- the output layer of the network: one neuron with a linear
// (identity) activation, a2 = LW2 * a1 + B2.
//
// The paper's block diagram gives LW2 and b2 as 1 x 1 and sends the sum a2
// straight to the denormalisation with no look-up table after it, so the
// output neuron is linear. The product is truncated from W_FRAC + DATA_FRAC to
// DATA_FRAC fraction bits, the bias is added and the result saturated.
//
// Interface: a1 hidden activation, a2 network output, both Q.DATA_FRAC.
// Timing: one register stage (stage 4 of 5); a2 holds while in_valid is low.
module output_layer
  import ann_pkg::*;
#(
  parameter coef_t LW2 = DEF_LW2,
  parameter coef_t B2  = DEF_B2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t a1,
  output logic  out_valid,
  output data_t a2
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      a2        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        a2 <= sat_data(((longint'(LW2) * longint'(a1)) >>> W_FRAC) + longint'(B2));
    end
  end

endmodule
