// tb_peak_detector -- self-checking test of the median-of-median peak detector.
// Three channels (NUM_CH overridden), driven as the filter would drive them: one sample per
// clock with the one-cycle look-ahead of the channel index. Samples are noise of a different
// amplitude per channel with occasional large excursions of either sign. The expected result
// is computed from plain sample histories, not from sorted lists: m1 = median of the channel's
// last five magnitudes, m2 = median of the last four m1 values taken at every fifth timestep
// plus the current m1 (start-up: the first sample stands for all missing history), peak when
// |x| > n_th * m2 / 4 after WARMUP frames. Checks every output cycle (is_peak, channel,
// amplitude, timestep, one cycle after the sample) and that both peaks and non-peaks occur.
module tb_peak_detector;
  import lsort_pkg::*;
  localparam int NCH = 3;
  localparam int WARM = 25;
  localparam int FRAMES = 4000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [7:0] n_th;
  logic la_valid, in_valid, out_valid, is_peak;
  ch_t la_ch, in_ch, pk_ch;
  ts_t in_ts, out_ts;
  logic signed [DATA_W-1:0] in_data;
  mag_t pk_amp;
  int checks = 0, failures = 0, n_peaks = 0;

  peak_detector #(.NUM_CH(NCH), .WARMUP(WARM)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int med5(int a, int b, int c, int d, int e);
    int q[$] = '{a, b, c, d, e};
    q.sort();
    return q[2];
  endfunction

  int h1 [NCH][$];   // last four magnitudes
  int h2 [NCH][$];   // last four stage-2 inputs
  // expected, indexed by sample number
  logic exp_peak [$];
  int   exp_ch [$], exp_amp [$], exp_ts [$];

  initial begin
    int x, mag, m1, m2, xs [NCH];
    rst_n = 0; n_th = 8'd16; la_valid = 0; in_valid = 0; la_ch = 0; in_ch = 0; in_ts = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < FRAMES; t++) begin
      for (int c = 0; c < NCH; c++) begin
        x = $urandom_range(0, 40 * (c + 1)) - 20 * (c + 1);
        if ($urandom_range(0, 60) == 0) x = ($urandom_range(0, 1) ? 1 : -1) * $urandom_range(100, 2048);
        if (x > 2047) x = 2047;
        mag = (x < 0) ? -x : x;
        if (mag > 2047) mag = 2047;
        if (t == 0) begin
          h1[c] = '{mag, mag, mag, mag};
          h2[c] = '{mag, mag, mag, mag};
        end
        m1 = med5(h1[c][0], h1[c][1], h1[c][2], h1[c][3], mag);
        m2 = med5(h2[c][0], h2[c][1], h2[c][2], h2[c][3], m1);
        if (t % 5 == 4) begin void'(h2[c].pop_front()); h2[c].push_back(m1); end
        void'(h1[c].pop_front()); h1[c].push_back(mag);
        exp_peak.push_back(t >= WARM && mag > ((16 * m2) >> 2));
        exp_ch.push_back(c); exp_amp.push_back(mag); exp_ts.push_back(t);
        // drive: look-ahead now, sample next cycle
        @(negedge clk);
        in_valid = la_valid; in_ch = la_ch; in_ts = ts_t'(t - ((c == 0) ? 1 : 0)); in_data = DATA_W'(xs[(c + NCH - 1) % NCH]);
        la_valid = 1; la_ch = ch_t'(c);
        xs[c] = x;
      end
    end
    @(negedge clk);
    in_valid = la_valid; in_ch = la_ch; in_ts = ts_t'(FRAMES - 1); in_data = DATA_W'(xs[NCH - 1]);
    la_valid = 0;
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_peaks < 20 || n_peaks > FRAMES * NCH / 5) begin
      failures++; $display("implausible peak count %0d", n_peaks);
    end
    checks++;
    if (exp_peak.size() != 0) begin failures++; $display("%0d samples never came out", exp_peak.size()); end
    $display("peaks %0d", n_peaks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample n enters at in_valid; its result appears one cycle later
  logic in_valid_d;
  always @(posedge clk) in_valid_d <= rst_n && in_valid;

  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== in_valid_d) begin
        failures++;
        if (failures < 10) $display("out_valid %0b expected %0b", out_valid, in_valid_d);
      end
      if (out_valid && exp_peak.size() > 0) begin
        logic ep; int ech, eamp, ets;
        ep = exp_peak.pop_front(); ech = exp_ch.pop_front(); eamp = exp_amp.pop_front(); ets = exp_ts.pop_front();
        if (is_peak) n_peaks++;
        checks++;
        if (is_peak !== ep || int'(pk_ch) != ech || int'(out_ts) != ets || (ep && int'(pk_amp) != eamp)) begin
          failures++;
          if (failures < 10) $display("ts %0d ch %0d: peak %0b exp %0b amp %0d exp %0d", ets, ech, is_peak, ep, pk_amp, eamp);
        end
      end else if (!out_valid && is_peak) begin
        failures++;
      end
    end
  end
endmodule
