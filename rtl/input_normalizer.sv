// input_normalizer -- maps the raw samples of a window into the network's
// normalised input range, xn = x * GAIN1 + YMIN1, for every sample at once.
//
// This is the first of the five pipeline stages of the network. The structure
// (a product with gain1 followed by a sum with ymin1) follows the block diagram
// of the paper; as drawn there, one gain and one offset are shared by all
// samples, and any input offset of the training tool is folded into YMIN1.
// GAIN1 carries GAIN1_FRAC fraction bits and YMIN1 DATA_FRAC; the product is
// truncated to DATA_FRAC fraction bits and the result saturated to data_t.
//
// Interface: x[i] raw unsigned samples, xn[i] normalised samples (Q.DATA_FRAC).
// Timing: one register stage; xn and out_valid follow x and in_valid by one
// clock. xn keeps its value while in_valid is low.
module input_normalizer
  import ann_pkg::*;
#(
  parameter int    N_INPUTS = N_SAMPLES,
  parameter coef_t GAIN1    = DEF_GAIN1,
  parameter int    G1_FRAC  = GAIN1_FRAC,
  parameter coef_t YMIN1    = DEF_YMIN1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t x  [N_INPUTS],
  output logic    out_valid,
  output data_t   xn [N_INPUTS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N_INPUTS; i++) xn[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N_INPUTS; i++)
          xn[i] <= sat_data(((longint'(x[i]) * longint'(GAIN1)) >>> (G1_FRAC - DATA_FRAC))
                            + longint'(YMIN1));
    end
  end

endmodule
