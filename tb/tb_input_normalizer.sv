// tb_input_normalizer -- self-checking test of the input normalisation stage
// xn = x * GAIN1 + YMIN1. Random windows, including the end points 0 and 4095
// of the 12-bit range, are applied; each output is compared with the exact
// fixed-point value worked out here (product truncated to DATA_FRAC bits) and
// also with the real-valued mapping of [0, 4095] onto [-1, 1] within one LSB,
// and the one-clock latency and the hold on idle cycles are checked.
module tb_input_normalizer;
  import ann_pkg::*;

  localparam int N = N_SAMPLES;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    in_valid = 1'b0;
  sample_t x [N];
  logic    out_valid;
  data_t   xn [N];

  int checks = 0, failures = 0;
  data_t  expect_xn [N];
  logic   expect_valid;
  sample_t x_last [N] = '{default: '0};
  logic   seen = 1'b0;   // a window has been normalised since reset

  input_normalizer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t ref_xn(input sample_t s);
    longint p;
    p = longint'(s) * longint'(DEF_GAIN1);
    return data_t'((p >>> (GAIN1_FRAC - DATA_FRAC)) + longint'(DEF_YMIN1));
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin x[i] = '0; expect_xn[i] = '0; end
    expect_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== expect_valid) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", t, out_valid, expect_valid);
      end
      for (int i = 0; i < N; i++) begin
        real ideal;
        checks += 2;
        if (xn[i] !== expect_xn[i]) begin
          failures++;
          $display("cycle %0d: xn[%0d]=%0d expected %0d", t, i, xn[i], expect_xn[i]);
        end
        ideal = (2.0 * real'(x_last[i]) / 4095.0 - 1.0) * 16384.0;
        if (seen && (real'(xn[i]) - ideal > 1.5 || ideal - real'(xn[i]) > 1.5)) begin
          failures++;
          $display("cycle %0d: xn[%0d]=%0d far from %f", t, i, xn[i], ideal);
        end
      end
      in_valid = 1'($urandom_range(0, 3) != 0);
      for (int i = 0; i < N; i++)
        case ($urandom_range(0, 5))
          0:       x[i] = '0;
          1:       x[i] = 12'hFFF;
          default: x[i] = sample_t'($urandom);
        endcase
      expect_valid = in_valid;
      seen = seen | in_valid;
      if (in_valid)
        for (int i = 0; i < N; i++) begin
          expect_xn[i] = ref_xn(x[i]);
          x_last[i]    = x[i];
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
