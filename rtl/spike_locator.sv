// spike_locator -- groups detected peaks into spikes and locates each spike at its central
// channel.
//
// A spike seen by a dense probe produces peaks on several neighbouring channels within a few
// timesteps. The locator keeps a spike bank of NUM_BUF buffers (16), each holding the
// timestep, channel and amplitude of the largest peak seen so far for one ongoing spike.
// Buffers are filled in order of creation: buffer 0 holds the oldest spike, occupied buffers
// are contiguous from 0, free ones read as zero.
//
// Each cycle one of three things happens:
//   * a peak arrives (is_peak = 1) and matches an ongoing spike -- channel distance at most
//     CH_WIN and at most TS_WIN timesteps after the stored peak; the lowest-numbered match
//     wins. If the new peak is larger, its timestep, channel and amplitude replace the stored
//     ones, otherwise the buffer is left alone;
//   * a peak arrives and matches nothing: it opens a new spike in the first free buffer. If
//     the bank is full the peak is dropped (peak_dropped pulses);
//   * no peak arrives: if the current timestep is more than SEND_DELAY timesteps past the
//     timestep of buffer 0, that spike is complete. Its timestep and channel (the channel of
//     its largest peak, which is the spike's position) go to the output register and the bank
//     shifts down by one.
// Because only the central channel is kept, no centre-of-mass sums, products or divisions are
// needed. The bank, its three operations and the send test on buffer 0 follow the published
// locator; the window sizes (CH_WIN, TS_WIN, SEND_DELAY) are this design's choice, SEND_DELAY
// being set so that a spike leaves about 2000 cycles after its peak at 384 channels.
//
// Interface: the registered outputs of peak_detector (in_ts is the timestep of the current
// cycle, held between samples). Output sp with valid/ready: while the output register is full
// and not accepted, no spike is sent and the bank simply holds on (it keeps accepting peaks).
//
// Lint may report rst_n as used both synchronously and asynchronously: the assertions below
// sample it in their disable condition; the logic uses it only as an asynchronous reset.
module spike_locator
  import lsort_pkg::*;
#(
  parameter int unsigned NUM_BUF    = 16,
  parameter int unsigned CH_WIN     = 4,
  parameter int unsigned TS_WIN     = 5,
  parameter int unsigned SEND_DELAY = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ts_t        in_ts,
  input  logic       is_peak,
  input  ch_t        pk_ch,
  input  mag_t       pk_amp,
  output logic       sp_valid,
  input  logic       sp_ready,
  output loc_spike_t sp,
  output logic       peak_dropped
);

  localparam int unsigned CW = $clog2(NUM_BUF + 1);
  localparam int unsigned IW = (NUM_BUF > 1) ? $clog2(NUM_BUF) : 1;

  spike_t        bank_q [NUM_BUF];
  logic [CW-1:0] count_q;

  // ---- match search over all buffers at once ----
  logic [NUM_BUF-1:0] match;
  logic               any_match;
  logic [IW-1:0]      match_idx;

  always_comb begin
    for (int i = 0; i < NUM_BUF; i++) begin
      ch_t d_ch;
      ts_t d_ts;
      d_ch = (pk_ch >= bank_q[i].ch) ? pk_ch - bank_q[i].ch : bank_q[i].ch - pk_ch;
      d_ts = in_ts - bank_q[i].ts;
      match[i] = (CW'(i) < count_q) && (32'(d_ch) <= CH_WIN) && (d_ts <= ts_t'(TS_WIN));
    end
    any_match = |match;
    match_idx = '0;
    for (int i = NUM_BUF - 1; i >= 0; i--) begin
      if (match[i]) match_idx = IW'(i);
    end
  end

  logic send;
  always_comb begin
    send = !is_peak && (count_q != '0) && (!sp_valid || sp_ready)
           && ((in_ts - bank_q[0].ts) > ts_t'(SEND_DELAY));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q      <= '0;
      peak_dropped <= 1'b0;
      for (int i = 0; i < NUM_BUF; i++) bank_q[i] <= '0;
    end else begin
      peak_dropped <= 1'b0;
      if (is_peak) begin
        if (any_match) begin
          if (pk_amp > bank_q[match_idx].amp) begin
            bank_q[match_idx] <= '{ts: in_ts, ch: pk_ch, amp: pk_amp};
          end
        end else if (32'(count_q) < NUM_BUF) begin
          bank_q[count_q[IW-1:0]] <= '{ts: in_ts, ch: pk_ch, amp: pk_amp};
          count_q         <= count_q + 1'b1;
        end else begin
          peak_dropped <= 1'b1;
        end
      end else if (send) begin
        for (int i = 0; i < NUM_BUF - 1; i++) bank_q[i] <= bank_q[i+1];
        bank_q[NUM_BUF-1] <= '0;
        count_q           <= count_q - 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_valid <= 1'b0;
      sp       <= '0;
    end else if (send) begin
      sp_valid <= 1'b1;
      sp       <= '{ts: bank_q[0].ts, ch: bank_q[0].ch};
    end else if (sp_ready) begin
      sp_valid <= 1'b0;
    end
  end

  // An offered spike stays on the output, unchanged, until clustering takes it; the bank never
  // holds more than NUM_BUF spikes.
  a_sp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    sp_valid && !sp_ready |=> sp_valid && $stable(sp));
  a_count: assert property (@(posedge clk) disable iff (!rst_n) 32'(count_q) <= NUM_BUF);

endmodule
