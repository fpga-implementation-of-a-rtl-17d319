// output_denormalizer -- returns the network output to the amplitude scale of
// the detector, y = (a2 - YMIN2) * GAIN2.
//
// This is the inverse of the input normalisation and the last of the five
// pipeline stages. The paper's block diagram shows a2 reduced by ymin2 and
// scaled by gain2; GAIN2 is therefore the reciprocal of the training tool's
// output gain, and any output offset is folded into YMIN2. GAIN2 carries
// G2_FRAC fraction bits; the product is truncated to OUT_FRAC fraction bits
// and saturated to an out_t word.
//
// Interface: a2 network output (Q.DATA_FRAC), y amplitude in ADC counts with
// OUT_FRAC fraction bits. Timing: one register stage; y holds while in_valid
// is low.
module output_denormalizer
  import ann_pkg::*;
#(
  parameter coef_t YMIN2   = DEF_YMIN2,
  parameter coef_t GAIN2   = DEF_GAIN2,
  parameter int    G2_FRAC = GAIN2_FRAC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t a2,
  output logic  out_valid,
  output out_t  y
);

  localparam int SHIFT = DATA_FRAC + G2_FRAC - OUT_FRAC;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        y <= sat_out(((longint'(a2) - longint'(YMIN2)) * longint'(GAIN2)) >>> SHIFT);
    end
  end

endmodule
