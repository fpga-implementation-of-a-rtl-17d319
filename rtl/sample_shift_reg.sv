// sample_shift_reg -- the 9-position sample shift register of one channel.
//
// Every bunch crossing (every 25 ns at the 40 MHz sampling rate) one new ADC
// sample arrives with in_valid. It enters at the newest end of the register and
// the oldest sample drops out, so the register always holds the last N_TAPS
// samples, which form the reconstruction window of the network.
//
// Interface: window[0] is the oldest sample, window[N_TAPS-1] the newest.
// Timing: the window including a sample is on the outputs, with out_valid high
// for one cycle, in the cycle after that sample was presented with in_valid.
// The clock may run faster than the sample rate; the register only shifts on
// in_valid. The 9-sample depth is the paper's; the in_valid strobe and the
// synchronous reset to zero are this design's own choices.
module sample_shift_reg
  import ann_pkg::*;
#(
  parameter int N_TAPS = N_SAMPLES
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t sample_in,
  output logic    out_valid,
  output sample_t window [N_TAPS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N_TAPS; i++) window[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N_TAPS - 1; i++) window[i] <= window[i+1];
        window[N_TAPS-1] <= sample_in;
      end
    end
  end

endmodule
