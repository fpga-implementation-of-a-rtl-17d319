// tb_ann_reconstructor -- end-to-end test of the full design at its default
// size: 48 channels, 9-sample windows, a 5,000-entry activation table and the
// default network constants.
//
// Every channel gets its own pile-up pulse train (a deposit in every bunch
// crossing), offered at a random rate: runs of back-to-back samples as at a
// 40 MHz clock and runs with idle clocks between samples as at a faster
// clock. Every amplitude of every channel is compared with the floating-point
// reference of the network on the same window, and must appear exactly
// LATENCY + 1 = 6 clocks after the sample that completed the window. Channel 0
// is also given, now and then, a window that drives the neuron input to the
// lower end of the table. The testbench counts windows with overlapping
// pulses (pile-up), back-to-back samples, idle gaps and table-end hits; each
// must occur at least once.
module tb_ann_reconstructor;
  import ann_pkg::*;
  import tb_pulse_pkg::*;

  localparam int NC = N_CHANNELS;
  localparam sample_t LOW_PATTERN [N_SAMPLES] =
    '{12'hFFF, 12'hFFF, 12'h000, 12'h000, 12'h000, 12'h000, 12'h000, 12'hFFF, 12'hFFF};

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    in_valid = 1'b0;
  sample_t samples [NC];
  logic    out_valid;
  out_t    amplitudes [NC];

  ann_reconstructor dut (.*);

  int checks = 0, failures = 0;
  int n_pileup = 0, n_b2b = 0, n_gap = 0, n_table_end = 0, n_out = 0;
  int cycle = 0;

  real exp_y [$];   // NC values per window, channel 0 first
  int  exp_t [$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      real yr [NC];
      n_out++;
      checks++;
      if (exp_t.size() == 0) begin
        failures++;
        $display("cycle %0d: unexpected amplitudes", cycle);
      end else begin
        for (int c = 0; c < NC; c++) yr[c] = exp_y.pop_front();
        if (exp_t.pop_front() != cycle) begin
          failures++;
          $display("cycle %0d: amplitudes at the wrong cycle", cycle);
        end
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (real'(amplitudes[c]) / 16.0 - yr[c] > TOL_COUNTS ||
              yr[c] - real'(amplitudes[c]) / 16.0 > TOL_COUNTS) begin
            failures++;
            $display("cycle %0d channel %0d: y=%f expected %f",
                     cycle, c, real'(amplitudes[c]) / 16.0, yr[c]);
          end
        end
      end
    end else if (exp_t.size() != 0 && exp_t[0] <= cycle) begin
      failures++;
      checks++;
      void'(exp_t.pop_front());
      for (int c = 0; c < NC; c++) void'(exp_y.pop_front());
      $display("cycle %0d: amplitudes missing", cycle);
    end
  end

  initial begin
    net_t    net;
    real     hist [NC][SHAPE_LEN];
    real     dep  [NC][N_SAMPLES];   // deposits behind each window sample
    sample_t win  [NC][N_SAMPLES];
    real     yv   [NC];
    ref_t    r;
    logic    prev = 1'b0;
    int      pat = -1;
    net = default_net();
    for (int c = 0; c < NC; c++) begin
      samples[c] = '0;
      for (int k = 0; k < SHAPE_LEN; k++) hist[c][k] = 0.0;
      for (int i = 0; i < N_SAMPLES; i++) begin win[c][i] = '0; dep[c][i] = 0.0; end
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      in_valid = ((t / 250) % 2 == 0) ? 1'b1 : 1'($urandom_range(0, 2) == 0);
      if (in_valid) begin
        if (pat < 0 && $urandom_range(0, 150) == 0) pat = 0;
        for (int c = 0; c < NC; c++) begin
          real d;
          d = random_deposit();
          samples[c] = next_sample(hist[c], d);
          if (c == 0 && pat >= 0) samples[c] = LOW_PATTERN[pat];
          for (int i = 0; i < N_SAMPLES - 1; i++) begin
            win[c][i] = win[c][i+1];
            dep[c][i] = dep[c][i+1];
          end
          win[c][N_SAMPLES-1] = samples[c];
          dep[c][N_SAMPLES-1] = d;
          r = ann_ref(net, win[c]);
          yv[c] = r.y;
          if (r.u <= U_LO + 0.0003) n_table_end++;
          // pile-up: two deposits above 200 counts less than a pulse apart
          for (int i = 0; i < N_SAMPLES - 1; i++)
            for (int j = i + 1; j < N_SAMPLES && j < i + SHAPE_LEN; j++)
              if (dep[c][i] > 200.0 && dep[c][j] > 200.0) n_pileup++;
        end
        if (pat >= 0) pat = (pat == N_SAMPLES - 1) ? -1 : pat + 1;
        for (int c = 0; c < NC; c++) exp_y.push_back(yv[c]);
        exp_t.push_back(cycle + LATENCY + 1);
        if (prev) n_b2b++;
      end else n_gap++;
      prev = in_valid;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_t.size() != 0) begin
      failures++;
      $display("%0d windows never produced amplitudes", exp_t.size());
    end
    $display("windows=%0d pileup_pairs=%0d back_to_back=%0d idle=%0d table_end=%0d",
             n_out, n_pileup, n_b2b, n_gap, n_table_end);
    checks++;
    if (n_pileup == 0 || n_b2b == 0 || n_gap == 0 || n_table_end == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
