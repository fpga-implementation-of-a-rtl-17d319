// tb_dataset_20000 -- the evaluation workload: 20,000 consecutive bunch
// crossings under the harshest pile-up (a deposit in every crossing) on all
// 48 channels, with a sample on every clock, i.e. the clock running at the
// 40 MHz bunch-crossing rate and no idle cycles.
//
// Checks: every one of the 20,000 x 48 amplitudes agrees with the
// floating-point reference of the network on its window; the design sustains
// one window per clock, so the last amplitude appears LATENCY + 1 = 6 clock
// edges after the last sample is presented, N_EVENTS - 1 + 6 = 20,005 clocks
// after the first sample is presented.
// With the placeholder constants the network is not a trained estimator, so
// no reconstruction-quality figure is checked.
module tb_dataset_20000;
  import ann_pkg::*;
  import tb_pulse_pkg::*;

  localparam int NC       = N_CHANNELS;
  localparam int N_EVENTS = 20000;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    in_valid = 1'b0;
  sample_t samples [NC];
  logic    out_valid;
  out_t    amplitudes [NC];

  ann_reconstructor dut (.*);

  int  checks = 0, failures = 0, n_out = 0;
  int  cycle = 0, first_in = -1, last_out = -1;
  real exp_y [$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (N_EVENTS + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    n_out++;
    last_out = cycle;
    for (int c = 0; c < NC; c++) begin
      real yr;
      checks++;
      if (exp_y.size() == 0) begin
        failures++;
        $display("cycle %0d: unexpected amplitude", cycle);
      end else begin
        yr = exp_y.pop_front();
        if (real'(amplitudes[c]) / 16.0 - yr > TOL_COUNTS ||
            yr - real'(amplitudes[c]) / 16.0 > TOL_COUNTS) begin
          failures++;
          if (failures < 20)
            $display("cycle %0d channel %0d: y=%f expected %f",
                     cycle, c, real'(amplitudes[c]) / 16.0, yr);
        end
      end
    end
  end

  initial begin
    net_t    net;
    real     hist [NC][SHAPE_LEN];
    sample_t win  [NC][N_SAMPLES];
    ref_t    r;
    net = default_net();
    for (int c = 0; c < NC; c++) begin
      samples[c] = '0;
      for (int k = 0; k < SHAPE_LEN; k++) hist[c][k] = 0.0;
      for (int i = 0; i < N_SAMPLES; i++) win[c][i] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    in_valid = 1'b1;
    first_in = cycle;
    for (int t = 0; t < N_EVENTS; t++) begin
      for (int c = 0; c < NC; c++) begin
        samples[c] = next_sample(hist[c], random_deposit());
        for (int i = 0; i < N_SAMPLES - 1; i++) win[c][i] = win[c][i+1];
        win[c][N_SAMPLES-1] = samples[c];
        r = ann_ref(net, win[c]);
        exp_y.push_back(r.y);
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks += 2;
    if (n_out != N_EVENTS) begin
      failures++;
      $display("%0d amplitude sets for %0d events", n_out, N_EVENTS);
    end
    if (last_out - first_in != N_EVENTS + LATENCY) begin
      failures++;
      $display("last amplitude %0d clocks after the first sample, expected %0d",
               last_out - first_in, N_EVENTS + LATENCY);
    end
    $display("events=%0d channels=%0d clocks from first sample to last amplitude=%0d",
             n_out, NC, last_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
