// tb_lsort_top -- end-to-end test of the spike sorter, top at its default size (384 channels).
//
// Two complete runs, each after a reset: first 384 channels per timestep (the full-size
// configuration), then 120 channels per timestep on the same hardware (the smaller
// configuration; a frame shorter than NUM_CH is legal). Each run is 560 timesteps.
//
// A synthetic recording: every channel carries uniform noise (+-80) smoothed by a two-tap
// average; "neurons" fire at chosen timesteps, each producing a biphasic, zero-sum spike
// (8 timesteps long, -900 at its trough) on its central channel and scaled copies on the
// neighbours (0.6, 0.3, 0.1 at distance 1, 2, 3). Sources: five isolated neurons spread over
// the probe, sometimes two firing in the same timestep, and a group of three neurons a few
// channels apart whose clusters must merge (cluster threshold 3). At the end more than sixteen
// neurons fire at once to overflow the spike bank.
//
// Checks:
//   * every neuron spike reaches clustering exactly once, located exactly at the firing
//     neuron's channel, 0..8 timesteps after it fired; at most two further spikes, detected
//     on noise alone when the approximate median dips, are tolerated (the median of only 5 x 5
//     samples fluctuates, so noise samples occasionally cross the threshold);
//   * sortingOut, decoded by a receiver written from the frame format, carries one spike frame
//     per located spike with the same timestep, spikes of one isolated neuron always get the
//     same cluster and different neurons different clusters;
//   * at least one merge frame appears;
//   * each mechanism happens at least once per run: detector warm-up suppression, stage-2
//     median update, a peak replacing the stored one in the bank, a smaller peak leaving it
//     alone, two spikes ongoing at once, locator stalled by busy clustering, clustering stalled
//     by the busy output, new cluster, join, merge, bank overflow.
// The top is instantiated with no parameter overrides.
module tb_lsort_top;
  import lsort_pkg::*;
  localparam int MAXCH = 384;   // the top's default NUM_CH
  localparam int FRAMES = 560;
  int nch;                        // channels of the current run (384, then 120)

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic signed [DATA_W-1:0] din;
  logic is_first_channel;
  logic [7:0] n_th;
  ch_t clu_th;
  logic sorting_out;
  int checks = 0, failures = 0;

  lsort_top dut (.*);

  initial begin
    repeat (FRAMES * (384 + 120) + 200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- stimulus plan ----------------
  typedef struct { int t0; int ch; logic iso; logic seen; } event_t;
  event_t evs [$];
  int isolated [5];
  int group [3];
  int burst_mod, burst_ofs;
  int burst_t = FRAMES - 40;
  localparam int SHAPE [8] = '{-300, -900, -600, 300, 600, 450, 300, 150};

  function automatic void plan();
    int k = 0;
    evs.delete();
    for (int t = 40; t < 300; t += 15, k++) begin
      evs.push_back('{t, isolated[k % 5], 1'b1, 1'b0});
      if (k >= 5 && k % 3 == 0) evs.push_back('{t, isolated[(k + 2) % 5], 1'b1, 1'b0});
    end
    // merge group, 30 timesteps apart so each spike has left the median window
    evs.push_back('{310, group[0], 1'b0, 1'b0});
    evs.push_back('{340, group[1], 1'b0, 1'b0});
    evs.push_back('{370, group[2], 1'b0, 1'b0});
    evs.push_back('{400, group[2], 1'b0, 1'b0});
    evs.push_back('{430, group[2], 1'b0, 1'b0});
    for (int t = 455; t < burst_t - 20; t += 15, k++) evs.push_back('{t, isolated[k % 5], 1'b1, 1'b0});
  endfunction

  int prev_r [MAXCH];
  function automatic int sample(int t, int c);
    int v, r;
    r = $urandom_range(0, 160) - 80;
    v = (r + prev_r[c]) / 2;   // two-tap average: keeps the noise mostly in band
    prev_r[c] = r;
    foreach (evs[i]) begin
      int d, k;
      d = c - evs[i].ch; if (d < 0) d = -d;
      k = t - evs[i].t0;
      if (d <= 3 && k >= 0 && k < 8) v += SHAPE[k] * ((d == 0) ? 10 : (d == 1) ? 6 : (d == 2) ? 3 : 1) / 10;
    end
    // overflow burst: more than 16 neurons, evenly spaced, in one timestep
    if (t >= burst_t && t < burst_t + 8 && c % burst_mod == burst_ofs) v += SHAPE[t - burst_t];
    return v;
  endfunction

  // ---------------- located-spike monitor (locator -> clustering) ----------------
  int located = 0, n_false = 0, located_ts [$];
  always @(posedge clk) begin
    if (rst_n && dut.l_valid && dut.l_ready && dut.l_spike.ts < ts_t'(burst_t)) begin
      int m;
      m = -1;
      foreach (evs[i])
        if (!evs[i].seen && evs[i].ch == int'(dut.l_spike.ch) &&
            int'(dut.l_spike.ts) >= evs[i].t0 && int'(dut.l_spike.ts) <= evs[i].t0 + 8) m = i;
      if (m < 0) begin
        n_false++;
        $display("noise detection: located spike ts %0d ch %0d matches no neuron", dut.l_spike.ts, dut.l_spike.ch);
      end
      if (m >= 0) evs[m].seen = 1;
      located++;
      located_ts.push_back(int'(dut.l_spike.ts));
    end
  end

  // ---------------- sortingOut receiver ----------------
  int n_spike_frames = 0, n_merge_frames = 0;
  int frame_ts [$], frame_clu [$];
  initial begin
    logic [40:0] bits;
    logic kind;
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (sorting_out == 1'b0) begin
        @(posedge clk); #1 kind = sorting_out;
        for (int i = 0; i < (kind ? 41 : 18); i++) begin
          @(posedge clk); #1 bits = {bits[39:0], sorting_out};
        end
        if (kind) begin
          n_spike_frames++;
          frame_ts.push_back(int'(bits[40:9]));
          frame_clu.push_back(int'(bits[8:0]));
        end else n_merge_frames++;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_warm_supp = 0, n_s2_upd = 0, n_repl = 0, n_keep = 0, n_multi = 0, n_loc_stall = 0,
      n_clu_stall = 0, n_overflow = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_detector.act && dut.u_detector.age < 6'(dut.u_detector.WARMUP)) n_warm_supp++;
    if (dut.u_detector.act && dut.u_detector.phase == 3'd4) n_s2_upd++;
    if (dut.u_locator.is_peak && dut.u_locator.any_match) begin
      if (dut.u_locator.pk_amp > dut.u_locator.bank_q[dut.u_locator.match_idx].amp) n_repl++;
      else n_keep++;
    end
    if (dut.u_locator.count_q >= 2) n_multi++;
    if (dut.l_valid && !dut.l_ready) n_loc_stall++;
    if (dut.r_valid && !dut.r_ready) n_clu_stall++;
    if (dut.u_locator.peak_dropped) n_overflow++;
  end
  int n_new = 0, n_join = 0;
  always @(posedge clk) if (rst_n && dut.u_cluster.state_q == dut.u_cluster.S_DECIDE) begin
    if (dut.u_cluster.best_v_q && dut.u_cluster.best_d_q <= dut.u_cluster.th) n_join++;
    else n_new++;
  end

  // ---------------- drive ----------------
  // One complete run: reset, FRAMES timesteps of n channels, then the checks.
  task automatic run(input int n);
    int n_evs_checked;
    int clu_of [int];
    int src_of_clu [int];
    nch = n;
    if (n == 384) begin
      isolated = '{40, 120, 200, 280, 350}; group = '{150, 156, 153}; burst_mod = 18; burst_ofs = 9;
    end else begin
      isolated = '{10, 35, 60, 85, 110}; group = '{47, 53, 50}; burst_mod = 7; burst_ofs = 3;
    end
    rst_n = 0; din = 0; is_first_channel = 0; n_th = 8'd64; clu_th = 9'd3;
    plan();
    foreach (prev_r[c]) prev_r[c] = 0;
    located = 0; n_false = 0; located_ts.delete();
    n_spike_frames = 0; n_merge_frames = 0; frame_ts.delete(); frame_clu.delete();
    n_warm_supp = 0; n_s2_upd = 0; n_repl = 0; n_keep = 0; n_multi = 0; n_loc_stall = 0;
    n_clu_stall = 0; n_overflow = 0; n_new = 0; n_join = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int t = 0; t < FRAMES; t++) begin
      for (int c = 0; c < nch; c++) begin
        @(negedge clk);
        din = DATA_W'(sample(t, c));
        is_first_channel = (c == 0);
      end
    end
    @(negedge clk); is_first_channel = 0; din = 0;
    repeat (400) @(negedge clk);
    // every planned neuron spike located once
    n_evs_checked = 0;
    foreach (evs[i]) begin
      check(evs[i].seen, $sformatf("spike of neuron at ch %0d, t %0d not located", evs[i].ch, evs[i].t0));
      n_evs_checked++;
    end
    $display("%0d channels: neuron spikes %0d, located %0d, spike frames %0d, merge frames %0d",
             nch, n_evs_checked, located, n_spike_frames, n_merge_frames);
    // the approximate median occasionally dips on pure noise: allow at most two false spikes
    check(located == evs.size() + n_false && n_false <= 2, $sformatf("%0d false spikes", n_false));
    // frames in order of the located spikes; isolated neurons keep one cluster each
    check(n_spike_frames >= located, "a spike frame for every located spike");
    for (int i = 0; i < located && i < n_spike_frames; i++) begin
      check(frame_ts[i] == located_ts[i], $sformatf("frame %0d timestep %0d, located %0d", i, frame_ts[i], located_ts[i]));
      foreach (evs[e]) begin
        if (evs[e].iso && frame_ts[i] >= evs[e].t0 && frame_ts[i] <= evs[e].t0 + 8) begin
          // two isolated neurons may share a timestep: accept the one already tied to this cluster
          if (src_of_clu.exists(frame_clu[i]) && src_of_clu[frame_clu[i]] != evs[e].ch) continue;
          if (!clu_of.exists(evs[e].ch)) begin
            check(!src_of_clu.exists(frame_clu[i]), "two neurons share a cluster");
            clu_of[evs[e].ch] = frame_clu[i];
            src_of_clu[frame_clu[i]] = evs[e].ch;
          end
          check(clu_of[evs[e].ch] == frame_clu[i], $sformatf("neuron %0d changed cluster", evs[e].ch));
          break;
        end
      end
    end
    check(clu_of.size() == 5, "five isolated neurons, five clusters");
    check(n_merge_frames >= 1, "merge frame seen");
    $display("warm-up %0d, stage-2 updates %0d, replace %0d, keep %0d, multi %0d, locator stall %0d, output stall %0d, new %0d, join %0d, overflow %0d",
             n_warm_supp, n_s2_upd, n_repl, n_keep, n_multi, n_loc_stall, n_clu_stall, n_new, n_join, n_overflow);
    check(n_warm_supp > 0, "warm-up suppression happened");
    check(n_s2_upd > 0, "stage-2 update happened");
    check(n_repl > 0, "peak replaced stored peak");
    check(n_keep > 0, "smaller peak left buffer alone");
    check(n_multi > 0, "two spikes ongoing at once");
    check(n_loc_stall > 0, "locator stalled by clustering");
    check(n_clu_stall > 0, "clustering stalled by output");
    check(n_new > 0 && n_join > 0, "new cluster and join happened");
    check(n_overflow > 0, "spike bank overflow happened");
  endtask

  initial begin
    run(384);   // c384: the full-size configuration
    run(120);   // c120: same hardware, 120 channels per timestep, after a fresh reset
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
