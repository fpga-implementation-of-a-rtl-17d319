// tb_activation_lut -- self-checking test of the tan-sigmoid look-up table.
// Two read ports are driven with random arguments spread over and beyond the
// table range [-1, 1.2]. Each activation is compared with tanh worked out here
// in floating point: inside the range it must lie within half a table step
// (plus rounding) of tanh(u); outside it must equal tanh of the nearest range
// end to within one LSB. Both clamps and the interior must be exercised, and
// the one-clock read latency is checked.
module tb_activation_lut;
  import ann_pkg::*;

  localparam int  P     = 2;
  localparam real SCALE = 16384.0;
  localparam real UMIN  = -1.0;
  localparam real UMAX  = 19661.0 / 16384.0;
  localparam real STEP  = (UMAX - UMIN) / real'(LUT_DEPTH - 1);

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  data_t u [P];
  logic  out_valid;
  data_t a [P];

  int checks = 0, failures = 0;
  int n_low = 0, n_high = 0, n_mid = 0;
  data_t u_last [P];
  logic  expect_valid;

  activation_lut #(.N_PORTS(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real tanh_r(input real v);
    return 2.0 / (1.0 + $exp(-2.0 * v)) - 1.0;
  endfunction

  task automatic check_port(input int p);
    real uv, ref_a, tol;
    uv = real'(u_last[p]) / SCALE;
    if (uv <= UMIN) begin
      ref_a = tanh_r(UMIN); tol = 1.0; n_low++;
    end else if (uv >= UMAX) begin
      ref_a = tanh_r(UMAX); tol = 1.0; n_high++;
    end else begin
      ref_a = tanh_r(uv); tol = 0.5 * STEP * SCALE + 1.0; n_mid++;
    end
    checks++;
    if (real'(a[p]) - ref_a * SCALE > tol || ref_a * SCALE - real'(a[p]) > tol) begin
      failures++;
      $display("port %0d: u=%f a=%0d expected %f", p, uv, a[p], ref_a * SCALE);
    end
  endtask

  initial begin
    for (int p = 0; p < P; p++) begin u[p] = '0; u_last[p] = '0; end
    expect_valid = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    for (int t = 0; t < 20000; t++) begin
      in_valid = 1'($urandom_range(0, 4) != 0);
      for (int p = 0; p < P; p++)
        u[p] = data_t'($signed($urandom_range(0, 2 * 28000)) - 28000);
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("cycle %0d: out_valid=%0b expected %0b", t, out_valid, in_valid);
      end
      if (in_valid) for (int p = 0; p < P; p++) u_last[p] = u[p];
      for (int p = 0; p < P; p++) check_port(p);
    end
    checks++;
    if (n_low == 0 || n_high == 0 || n_mid == 0) begin
      failures++;
      $display("range not covered: low=%0d high=%0d mid=%0d", n_low, n_high, n_mid);
    end
    $display("clamped low=%0d high=%0d interior=%0d", n_low, n_high, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
