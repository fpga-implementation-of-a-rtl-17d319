// activation_lut -- the tan-sigmoid activation of the hidden neuron,
// g(u) = 2/(1 + exp(-2u)) - 1, read from a look-up table, with one read port
// per channel.
//
// The table holds DEPTH samples of g taken at evenly spaced arguments from
// U_MIN to U_MAX, both ends included; the paper uses 5,000 samples over the
// range [-1, 1.2]. A neuron input u is turned into a table address by
//   addr = round((u - U_MIN) * (DEPTH - 1) / (U_MAX - U_MIN)),
// a constant multiply by IDX_SCALE = (DEPTH-1)/(U_MAX-U_MIN) held with
// SCALE_FRAC fraction bits. Arguments below U_MIN read entry 0 and arguments
// above U_MAX read entry DEPTH-1. Reading the range as the argument range,
// the clamping and the address arithmetic are this design's own choices.
//
// The table is a ROM filled at start-up from ann_pkg::tanh_q, an integer-only
// evaluation, so no data file is needed; entry i holds
//   round(2**DATA_FRAC * tanh(U_MIN + i * (U_MAX - U_MIN) / (DEPTH - 1))).
// All channels evaluate the same function, so one table with N_PORTS read
// ports serves them all; an FPGA tool maps it onto as many block-RAM copies
// as the port count needs (two ports per dual-port block RAM). Sharing one
// table description is this design's choice; the paper does not say whether
// its channels share tables.
//
// Interface: u[p] and a[p] are data_t words in Q.DATA_FRAC, one per port;
// U_MIN/U_MAX are Q.DATA_FRAC too. Timing: one register stage (stage 3 of 5
// of the channel pipeline), a synchronous ROM read; a[p] and out_valid follow
// u[p] and in_valid by one clock, and a[p] holds while in_valid is low.
module activation_lut
  import ann_pkg::*;
#(
  parameter int N_PORTS    = 1,
  parameter int DEPTH      = LUT_DEPTH,
  parameter int U_MIN      = U_MIN_Q,
  parameter int U_MAX      = U_MAX_Q,
  parameter int SCALE_FRAC = 24
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t u [N_PORTS],
  output logic  out_valid,
  output data_t a [N_PORTS]
);

  localparam int     AW        = $clog2(DEPTH);
  localparam int     QS        = 28 - DATA_FRAC;  // Q.DATA_FRAC -> Q.28
  localparam longint SPAN      = longint'(U_MAX) - longint'(U_MIN);
  localparam longint LAST      = longint'(DEPTH) - 1;
  localparam longint IDX_SCALE = ((LAST <<< SCALE_FRAC) + SPAN / 2) / SPAN;
  localparam longint HALF      = longint'(1) <<< (SCALE_FRAC - 1);

  data_t rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++)
      rom[i] = tanh_q((longint'(U_MIN) <<< QS) + (longint'(i) * (SPAN <<< QS)) / LAST);
  end

  // Address of one argument: scale, round, clamp to the table.
  function automatic logic [AW-1:0] address(input data_t arg);
    longint diff, scaled;
    diff   = longint'(arg) - longint'(U_MIN);
    scaled = (diff * IDX_SCALE + HALF) >>> SCALE_FRAC;
    if (diff <= 0)           return '0;
    else if (scaled >= LAST) return AW'(LAST);
    else                     return AW'(scaled);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int p = 0; p < N_PORTS; p++) a[p] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int p = 0; p < N_PORTS; p++) a[p] <= rom[address(u[p])];
    end
  end

endmodule
