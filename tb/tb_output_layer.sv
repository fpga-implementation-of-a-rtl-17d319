// tb_output_layer -- self-checking test of the linear output neuron
// a2 = LW2 * a1 + B2, with weight and bias set by the testbench. Random
// activations are applied and a2 is compared with the value worked out here
// (product truncated to DATA_FRAC bits, bias added, saturated) one clock
// after in_valid; large weights make the saturation happen too.
module tb_output_layer;
  import ann_pkg::*;

  localparam coef_t LW = 18'sd50000;   // about 3.05
  localparam coef_t BB = -18'sd3000;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  data_t a1 = '0;
  logic  out_valid;
  data_t a2;

  int checks = 0, failures = 0, saturated = 0;
  data_t expect_a2;
  logic  expect_valid;

  output_layer #(.LW2(LW), .B2(BB)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_a2 = '0;
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
      if (a2 !== expect_a2) begin
        failures++;
        $display("cycle %0d: a2=%0d expected %0d", t, a2, expect_a2);
      end
      in_valid = 1'($urandom_range(0, 3) != 0);
      a1 = (t % 7 == 0) ? data_t'(($urandom_range(0, 1) != 0) ? 60000 : -60000)
                        : data_t'($signed($urandom_range(0, 32768)) - 16384);
      expect_valid = in_valid;
      if (in_valid) begin
        s = ((longint'(LW) * longint'(a1)) >>> 14) + longint'(BB);
        if (s > 131071)       begin s = 131071;  saturated++; end
        else if (s < -131072) begin s = -131072; saturated++; end
        expect_a2 = data_t'(s);
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
