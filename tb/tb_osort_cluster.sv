// tb_osort_cluster -- self-checking test of the position-based O-Sort clustering.
// Part 1, directed (threshold 3): spikes at channels 100 and 104 open clusters 0 and 1; a
// spike at 102 joins cluster 0 (tie broken to the lower index), whose centre moves to 101,
// now within 3 of cluster 1, so 1 merges into 0 (centre 103); a spike at 200 reuses the freed
// entry 1. Part 2, random spikes (threshold 5, random output stalls) against a reference model
// of the cluster table written from the algorithm description, comparing every result and
// the latency from accepting a spike to its result (n + 3 cycles for n table entries in use).
// New cluster, join, merge, entry reuse and output stall must all occur.
module tb_osort_cluster;
  import lsort_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  ch_t th;
  logic sp_valid, sp_ready, res_valid, res_ready;
  loc_spike_t sp;
  result_t res;
  int checks = 0, failures = 0;

  osort_cluster dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // ---- reference model ----
  int cen [384];
  int n_alloc = 0;
  result_t exp_q [$];
  int n_new = 0, n_join = 0, n_merge = 0, n_reuse = 0, n_stall = 0;
  int exp_lat;

  function automatic int ad(int a, int b); return (a > b) ? a - b : b - a; endfunction

  task automatic model(input int p, input int ts, input int thr);
    int best, free_i, k, c2, j;
    best = -1; free_i = -1;
    // res_valid rises n + 3 edges after the accepting edge and is first sampled one edge later
    exp_lat = (n_alloc == 0) ? 3 : n_alloc + 4;
    for (int i = 0; i < n_alloc; i++) begin
      if (cen[i] < 0) begin if (free_i < 0) free_i = i; end
      else if (best < 0 || ad(cen[i], p) < ad(cen[best], p)) best = i;
    end
    if (best >= 0 && ad(cen[best], p) <= thr) begin
      k = best;
      cen[k] = (cen[k] + p + 1) / 2;
      exp_q.push_back('{RES_SPIKE, ts_t'(ts), ch_t'(k), ch_t'(0)});
      n_join++;
      j = -1;
      for (int i = 0; i < n_alloc; i++)
        if (i != k && cen[i] >= 0 && (j < 0 || ad(cen[i], cen[k]) < ad(cen[j], cen[k]))) j = i;
      if (j >= 0 && ad(cen[j], cen[k]) <= thr) begin
        c2 = (cen[j] + cen[k] + 1) / 2;
        if (k < j) begin cen[k] = c2; cen[j] = -1; exp_q.push_back('{RES_MERGE, ts_t'(ts), ch_t'(j), ch_t'(k)}); end
        else       begin cen[j] = c2; cen[k] = -1; exp_q.push_back('{RES_MERGE, ts_t'(ts), ch_t'(k), ch_t'(j)}); end
        n_merge++;
      end
    end else begin
      if (free_i >= 0) begin k = free_i; n_reuse++; end
      else begin k = n_alloc; n_alloc++; end
      cen[k] = p;
      exp_q.push_back('{RES_SPIKE, ts_t'(ts), ch_t'(k), ch_t'(0)});
      n_new++;
    end
  endtask

  // ---- result monitor ----
  int acc_cyc = -1, cyc = 0, lat_exp_q [$];
  logic first_res_pending = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && sp_valid && sp_ready) begin acc_cyc = cyc; first_res_pending = 1; end
    if (rst_n && res_valid && first_res_pending) begin
      int e;
      first_res_pending = 0;
      e = lat_exp_q.pop_front();
      check(cyc - acc_cyc == e, $sformatf("latency %0d expected %0d", cyc - acc_cyc, e));
    end
    if (rst_n && res_valid && !res_ready) n_stall++;
    if (rst_n && res_valid && res_ready) begin
      result_t e;
      if (exp_q.size() == 0) check(0, "unexpected result");
      else begin
        e = exp_q.pop_front();
        check(res.kind == e.kind && res.idx_a == e.idx_a &&
              (res.kind == RES_MERGE ? res.idx_b == e.idx_b : res.ts == e.ts),
              $sformatf("result kind %0d a %0d b %0d ts %0d, expected kind %0d a %0d b %0d ts %0d",
                        res.kind, res.idx_a, res.idx_b, res.ts, e.kind, e.idx_a, e.idx_b, e.ts));
      end
    end
  end

  task automatic send_spike(input int p, input int ts);
    model(p, ts, int'(th));
    lat_exp_q.push_back(exp_lat);
    @(negedge clk);
    sp_valid = 1; sp = '{ts_t'(ts), ch_t'(p)};
    do @(posedge clk); while (!sp_ready);
    #1 sp_valid = 0;
  endtask

  initial begin
    rst_n = 0; th = 3; sp_valid = 0; sp = '0; res_ready = 1;
    for (int i = 0; i < 384; i++) cen[i] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- part 1 ----
    send_spike(100, 10);
    send_spike(104, 20);
    send_spike(102, 30);
    send_spike(200, 40);
    repeat (40) @(negedge clk);
    check(exp_q.size() == 0, "directed results all seen");
    check(n_merge == 1 && n_reuse == 1, "directed: one merge, one reused entry");
    check(dut.u_table.mem[0] == 9'd103 && dut.u_table.mem[1] == 9'd200, "directed: table contents");
    // ---- part 2 ----
    th = 5;
    for (int n = 0; n < 1500; n++) begin
      res_ready = ($urandom_range(0, 2) != 0);
      send_spike($urandom_range(0, 383), 1000 + n);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    res_ready = 1;
    repeat (2000) @(negedge clk);
    check(exp_q.size() == 0, "all results seen");
    $display("new %0d join %0d merge %0d reuse %0d stall %0d", n_new, n_join, n_merge, n_reuse, n_stall);
    check(n_new > 0 && n_join > 0 && n_merge > 0 && n_reuse > 0 && n_stall > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stalls: res_ready toggles randomly while results wait
  always @(negedge clk) if (rst_n && res_valid && $urandom_range(0, 3) == 0) res_ready = !res_ready;
endmodule
