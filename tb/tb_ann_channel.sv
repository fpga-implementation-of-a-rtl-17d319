// tb_ann_channel -- end-to-end test of one reconstruction channel, with an
// activation table attached to its table port.
//
// A pile-up pulse train (a deposit in every bunch crossing) is fed in at a
// random rate: runs of back-to-back samples and runs with idle clocks between
// samples. Every amplitude is compared with the floating-point reference of
// the same network on the same 9-sample window, and must appear exactly
// LATENCY + 1 = 6 clocks after the sample that completed its window. The
// testbench uses input weights 1.5 times the defaults so that the neuron
// input leaves the table range at both ends; both clamps, the interior,
// back-to-back samples and idle gaps are counted and each must occur.
module tb_ann_channel;
  import ann_pkg::*;
  import tb_pulse_pkg::*;

  localparam weights_t W15 = '{-18'sd1229, -18'sd1229, 18'sd0, 18'sd3687, 18'sd12288,
                               18'sd3687, 18'sd0, -18'sd1229, -18'sd1229};

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    in_valid = 1'b0;
  sample_t sample_in = '0;
  logic    out_valid;
  out_t    y;
  logic    lut_valid, lut_a_valid;
  data_t   lut_u, lut_a;
  data_t   lut_u_arr [1];
  data_t   lut_a_arr [1];

  ann_channel #(.IW1(W15)) dut (
    .clk, .rst_n, .in_valid, .sample_in, .out_valid, .y,
    .lut_valid, .lut_u, .lut_a_valid, .lut_a
  );

  assign lut_u_arr[0] = lut_u;
  assign lut_a        = lut_a_arr[0];

  activation_lut #(.N_PORTS(1)) u_table (
    .clk, .rst_n, .in_valid(lut_valid), .u(lut_u_arr),
    .out_valid(lut_a_valid), .a(lut_a_arr)
  );

  int checks = 0, failures = 0;
  int n_low = 0, n_high = 0, n_mid = 0, n_b2b = 0, n_gap = 0, n_out = 0;
  int cycle = 0;

  // expected results, in order, with the cycle each is due
  real exp_y [$];
  int  exp_t [$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      real yr;
      n_out++;
      checks += 2;
      if (exp_y.size() == 0) begin
        failures++;
        $display("cycle %0d: unexpected amplitude", cycle);
      end else begin
        yr = exp_y.pop_front();
        if (exp_t.pop_front() != cycle) begin
          failures++;
          $display("cycle %0d: amplitude at the wrong cycle", cycle);
        end
        if (real'(y) / 16.0 - yr > TOL_COUNTS || yr - real'(y) / 16.0 > TOL_COUNTS) begin
          failures++;
          $display("cycle %0d: y=%f expected %f", cycle, real'(y) / 16.0, yr);
        end
      end
    end else if (exp_t.size() != 0 && exp_t[0] <= cycle) begin
      failures++;
      checks++;
      void'(exp_t.pop_front());
      void'(exp_y.pop_front());
      $display("cycle %0d: amplitude missing", cycle);
    end
  end

  initial begin
    net_t    net;
    real     hist [SHAPE_LEN];
    sample_t win [N_SAMPLES];
    ref_t    r;
    logic    prev = 1'b0;
    net = default_net();
    net.iw1 = W15;
    for (int k = 0; k < SHAPE_LEN; k++) hist[k] = 0.0;
    for (int i = 0; i < N_SAMPLES; i++) win[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      in_valid = ((t / 300) % 2 == 0) ? 1'b1 : 1'($urandom_range(0, 3) == 0);
      if (in_valid) begin
        // a few bunch crossings with ADC saturation or an empty channel
        case ($urandom_range(0, 40))
          0:       sample_in = 12'hFFF;
          1:       sample_in = 12'h000;
          default: sample_in = next_sample(hist, random_deposit());
        endcase
        for (int i = 0; i < N_SAMPLES - 1; i++) win[i] = win[i+1];
        win[N_SAMPLES-1] = sample_in;
        r = ann_ref(net, win);
        if (r.u <= U_LO) n_low++; else if (r.u >= U_HI) n_high++; else n_mid++;
        exp_y.push_back(r.y);
        exp_t.push_back(cycle + LATENCY + 1);
        if (prev) n_b2b++;
      end else n_gap++;
      prev = in_valid;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_y.size() != 0) begin
      failures++;
      $display("%0d amplitudes never appeared", exp_y.size());
    end
    $display("windows=%0d clamp_low=%0d clamp_high=%0d interior=%0d back_to_back=%0d idle=%0d",
             n_out, n_low, n_high, n_mid, n_b2b, n_gap);
    checks++;
    if (n_low == 0 || n_high == 0 || n_mid == 0 || n_b2b == 0 || n_gap == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
