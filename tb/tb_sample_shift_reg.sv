// tb_sample_shift_reg -- self-checking test of the 9-position sample shift
// register. Random samples are offered with a random in_valid pattern (about
// one cycle in two idle, as when the clock runs faster than the 40 MHz sample
// rate, plus runs of back-to-back samples); a queue in the testbench keeps the
// last nine accepted samples and every window is compared with it, along with
// the one-cycle delay from in_valid to out_valid and the hold on idle cycles.
module tb_sample_shift_reg;
  import ann_pkg::*;

  localparam int N = N_SAMPLES;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    in_valid = 1'b0;
  sample_t sample_in = '0;
  logic    out_valid;
  sample_t window [N];

  int checks = 0, failures = 0;
  sample_t model [N];
  logic    prev_valid;

  sample_shift_reg #(.N_TAPS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    prev_valid = 1'b0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // check what the last rising edge produced
      if (out_valid !== prev_valid) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", t, out_valid, prev_valid);
      end
      checks++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (window[i] !== model[i]) begin
          failures++;
          $display("cycle %0d: window[%0d]=%0d expected %0d", t, i, window[i], model[i]);
        end
      end
      // drive the next sample
      in_valid  = (t % 200 < 50) ? 1'b1 : 1'($urandom_range(0, 1));
      sample_in = sample_t'($urandom);
      prev_valid = in_valid;
      if (in_valid) begin
        for (int i = 0; i < N - 1; i++) model[i] = model[i+1];
        model[N-1] = sample_in;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
