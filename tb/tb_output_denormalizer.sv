// tb_output_denormalizer -- self-checking test of the output denormalisation
// y = (a2 - YMIN2) * GAIN2 with the default constants, which map the network
// range [-1, 1] back onto [0, 4095] ADC counts. Each amplitude is compared
// with the exact fixed-point value worked out here and with the real-valued
// mapping within one output LSB, one clock after in_valid.
module tb_output_denormalizer;
  import ann_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  data_t a2 = '0;
  logic  out_valid;
  out_t  y;

  int checks = 0, failures = 0;
  out_t  expect_y;
  real   expect_r;
  logic  expect_valid;

  output_denormalizer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_y = '0;
    expect_r = 0.0;
    expect_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks += 3;
      if (out_valid !== expect_valid) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", t, out_valid, expect_valid);
      end
      if (y !== expect_y) begin
        failures++;
        $display("cycle %0d: y=%0d expected %0d", t, y, expect_y);
      end
      if (real'(y) / 16.0 - expect_r > 0.07 || expect_r - real'(y) / 16.0 > 0.07) begin
        failures++;
        $display("cycle %0d: y=%f counts, expected %f", t, real'(y) / 16.0, expect_r);
      end
      in_valid = 1'($urandom_range(0, 3) != 0);
      a2 = data_t'($signed($urandom_range(0, 40000)) - 20000);
      expect_valid = in_valid;
      if (in_valid) begin
        expect_y = out_t'(((longint'(a2) + 16384) * 32760) >>> 14);
        expect_r = (real'(a2) / 16384.0 + 1.0) * 2047.5;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
