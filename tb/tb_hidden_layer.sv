// tb_hidden_layer -- self-checking test of the hidden neuron
// u1 = sum IW1[i] * xn[i] + B1. The testbench sets its own weights and a
// non-zero bias, drives random normalised samples (and full-scale ones that
// drive the sum into saturation), and compares u1 with a sum worked out here,
// truncated and saturated to data_t, one clock after in_valid.
module tb_hidden_layer;
  import ann_pkg::*;

  localparam int N = N_SAMPLES;
  localparam coef_t W [N] = '{18'sd1000, -18'sd2000, 18'sd3000, 18'sd4000,
                              18'sd20000, -18'sd5000, 18'sd700, -18'sd60000, 18'sd9};
  localparam coef_t BIAS = -18'sd1234;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  data_t xn [N];
  logic  out_valid;
  data_t u1;

  int checks = 0, failures = 0, saturated = 0;
  data_t expect_u;
  logic  expect_valid;

  hidden_layer #(.N_INPUTS(N), .IW1(W), .B1(BIAS)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) xn[i] = '0;
    expect_u = '0;
    expect_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 3000; t++) begin
      longint s;
      @(negedge clk);
      checks += 2;
      if (out_valid !== expect_valid) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", t, out_valid, expect_valid);
      end
      if (u1 !== expect_u) begin
        failures++;
        $display("cycle %0d: u1=%0d expected %0d", t, u1, expect_u);
      end
      in_valid = 1'($urandom_range(0, 3) != 0);
      for (int i = 0; i < N; i++)
        xn[i] = (t % 10 == 0) ? data_t'(((i == 7) ? -1 : 1) * 131071)
                              : data_t'($signed($urandom_range(0, 32768)) - 16384);
      expect_valid = in_valid;
      if (in_valid) begin
        s = 0;
        for (int i = 0; i < N; i++) s += longint'(W[i]) * longint'(xn[i]);
        s = (s >>> 14) + longint'(BIAS);
        if (s > 131071)       begin s = 131071;  saturated++; end
        else if (s < -131072) begin s = -131072; saturated++; end
        expect_u = data_t'(s);
      end
    end
    checks++;
    if (saturated == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
