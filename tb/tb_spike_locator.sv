// tb_spike_locator -- self-checking test of the spike bank.
// Part 1 replays the published worked example: a bank holding
//   #0 2216/89/231, #1 2221/317/142, #2 2232/255/94, #3 2233/64/124 (timestep/channel/amp)
// receives peak (1) 2234/147/127, which matches nothing and opens buffer #4; peak (2)
// 2235/254/63, which matches buffer #2 but is smaller and leaves it unchanged; and (3) a cycle
// without a peak at timestep 2236, which sends buffer #0. That instance uses SEND_DELAY = 19
// so that buffer #0 is still waiting when the example starts, as in the example.
// Part 2 runs the default instance against a queue model on random peaks, with the
// downstream ready signal randomly low (stalls), and a burst of 17 unrelated peaks in one
// timestep to overflow the 16 buffers. Mechanisms counted: new spike, merge-and-replace,
// merge-without-replace, send, stall, overflow; each must occur.
module tb_spike_locator;
  import lsort_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ part 1
  ts_t f_ts; logic f_peak; ch_t f_ch; mag_t f_amp;
  logic f_sp_valid, f_sp_ready, f_drop; loc_spike_t f_sp;
  spike_locator #(.SEND_DELAY(19)) u_fig (
    .clk(clk), .rst_n(rst_n), .in_ts(f_ts), .is_peak(f_peak), .pk_ch(f_ch), .pk_amp(f_amp),
    .sp_valid(f_sp_valid), .sp_ready(f_sp_ready), .sp(f_sp), .peak_dropped(f_drop));

  task automatic fig_peak(input int ts, input int ch, input int amp);
    @(negedge clk); f_ts = ts_t'(ts); f_peak = 1; f_ch = ch_t'(ch); f_amp = mag_t'(amp);
    @(negedge clk); f_peak = 0;   // one cycle without a peak after each
  endtask

  // ------------------------------------------------------------ part 2
  ts_t r_ts; logic r_peak; ch_t r_ch; mag_t r_amp;
  logic r_sp_valid, r_sp_ready, r_drop; loc_spike_t r_sp;
  spike_locator u_rnd (
    .clk(clk), .rst_n(rst_n), .in_ts(r_ts), .is_peak(r_peak), .pk_ch(r_ch), .pk_amp(r_amp),
    .sp_valid(r_sp_valid), .sp_ready(r_sp_ready), .sp(r_sp), .peak_dropped(r_drop));

  spike_t m_bank [$];
  logic   m_out_v = 0;
  loc_spike_t m_out;
  int n_new = 0, n_repl = 0, n_keep = 0, n_send = 0, n_stall = 0, n_over = 0;

  // model step, evaluated with the inputs of the cycle before the clock edge
  task automatic model_step(output logic drop);
    int k;
    logic send;
    drop = 0;
    send = 0;
    if (r_peak) begin
      k = -1;
      foreach (m_bank[i]) begin
        int dc;
        dc = int'(r_ch) - int'(m_bank[i].ch);
        if (dc < 0) dc = -dc;
        if (k < 0 && dc <= 4 && (r_ts - m_bank[i].ts) <= 5) k = i;
      end
      if (k >= 0) begin
        if (r_amp > m_bank[k].amp) begin m_bank[k] = '{r_ts, r_ch, r_amp}; n_repl++; end
        else n_keep++;
      end else if (m_bank.size() < 16) begin
        m_bank.push_back('{r_ts, r_ch, r_amp}); n_new++;
      end else begin
        drop = 1; n_over++;
      end
    end else if (m_bank.size() > 0 && (r_ts - m_bank[0].ts) > 5) begin
      if (!m_out_v || r_sp_ready) begin
        send = 1;
      end else n_stall++;
    end
    if (send) begin
      m_out = '{m_bank[0].ts, m_bank[0].ch};
      void'(m_bank.pop_front());
      m_out_v = 1;
      n_send++;
    end else if (r_sp_ready) m_out_v = 0;
  endtask

  initial begin
    logic drop;
    rst_n = 0;
    f_ts = 0; f_peak = 0; f_ch = 0; f_amp = 0; f_sp_ready = 1;
    r_ts = 0; r_peak = 0; r_ch = 0; r_amp = 0; r_sp_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- part 1: the worked example ----
    fig_peak(2216, 89, 231);
    fig_peak(2221, 317, 142);
    fig_peak(2232, 255, 94);
    fig_peak(2233, 64, 124);
    check(u_fig.count_q == 4 && !f_sp_valid, "example: bank preloaded with four spikes");
    fig_peak(2234, 147, 127);                                            // (1)
    check(u_fig.count_q == 5 && u_fig.bank_q[4] == '{2234, 147, 127}, "(1) opens buffer #4");
    fig_peak(2235, 254, 63);                                             // (2)
    check(u_fig.count_q == 5 && u_fig.bank_q[2] == '{2232, 255, 94}, "(2) leaves buffer #2");
    check(!f_sp_valid, "(2) nothing sent before timestep 2236");
    @(negedge clk); f_ts = 2236; f_peak = 0;                             // (3)
    @(posedge clk); #1;
    check(f_sp_valid && f_sp.ts == 2216 && f_sp.ch == 89, "(3) buffer #0 sent");
    check(u_fig.count_q == 4 && u_fig.bank_q[0] == '{2221, 317, 142} && u_fig.bank_q[3] == '{2234, 147, 127},
          "(3) bank shifted down");
    check(u_fig.bank_q[15] == '0, "free buffers read as zero");

    // ---- part 2: random peaks against the model ----
    for (int t = 1; t < 3000; t++) begin
      int npk;
      npk = (t % 400 == 200) ? 17 : (($urandom_range(0, 3) == 0) ? $urandom_range(1, 4) : 0);
      for (int s = 0; s < 6; s++) begin
        @(negedge clk);
        r_ts = ts_t'(t);
        r_peak = (s < npk) || (npk == 17 && s < 6);
        if (npk == 17) r_ch = ch_t'(s * 20 + 10);
        else r_ch = ch_t'($urandom_range(100, 120));
        r_amp = mag_t'($urandom_range(50, 500));
        r_sp_ready = ($urandom_range(0, 4) != 0);
        model_step(drop);
        @(posedge clk); #1;
        check(r_sp_valid == m_out_v && (!m_out_v || r_sp == m_out), $sformatf("t=%0d output", t));
        check(int'(u_rnd.count_q) == m_bank.size() && r_drop == drop, $sformatf("t=%0d bank size", t));
      end
      if (npk == 17) begin
        // the rest of the burst: 11 more unrelated peaks in the same timestep
        for (int s = 6; s < 17; s++) begin
          @(negedge clk);
          r_peak = 1; r_ch = ch_t'(s * 20 + 10); r_amp = mag_t'(300);
          model_step(drop);
          @(posedge clk); #1;
          check(int'(u_rnd.count_q) == m_bank.size() && r_drop == drop, "burst");
        end
      end
    end
    $display("new %0d replace %0d keep %0d send %0d stall %0d overflow %0d",
             n_new, n_repl, n_keep, n_send, n_stall, n_over);
    check(n_new > 0 && n_repl > 0 && n_keep > 0 && n_send > 0 && n_stall > 0 && n_over > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
