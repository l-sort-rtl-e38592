// lsort_top -- L-Sort on-chip spike sorter: filter, median-of-median detector, spike locator,
// position-based O-Sort clustering and a one-wire result port.
//
// Samples of all NUM_CH channels arrive interleaved, one 12-bit sample per clock, channel 0
// marked by is_first_channel; the clock therefore runs at NUM_CH x the sampling rate
// (384 x 30 kHz = 11.52 MHz). The chain is
//   iir_filter     band-pass 300 Hz - 6 kHz, per-channel state in a 24 x NUM_CH memory,
//                  2 cycles;
//   peak_detector  |x| > N_th x approximate 25-sample median-of-median of |x|, per-channel
//                  state in a 104 x NUM_CH memory, 1 cycle;
//   spike_locator  16-buffer spike bank; a spike leaves SEND_DELAY timesteps after its
//                  largest peak, located at that peak's channel;
//   osort_cluster  nearest-centre clustering with threshold clu_th and cluster merging,
//                  cluster table in a 9 x 384 single-port memory;
//   result_uart    results on sorting_out (idle high, start bit, kind bit, payload).
// Valid/ready handshakes between locator, clustering and output let a busy output stall the
// clustering, and a busy clustering hold spikes back in the bank.
//
// n_th (unsigned, 2 fractional bits) and clu_th (channels) are run-time settings. The pad
// ring of the chip is not modelled: the ports are the core's signals.
//
// The block order, the per-block latencies (filter 2 cycles, detector 1 cycle) and the memory
// sizes follow the paper. The handshakes, the look-ahead channel from filter to detector (so
// the detector's state read is issued one cycle early) and the port names are this design's
// own. The locator's overflow pulse (peak_dropped) is left unconnected on purpose: the chip
// has no pin for it, and it exists for testing the locator on its own.
//
// Lint may report rst_n as used both synchronously and asynchronously: the assertions in the
// blocks sample it in their disable condition; the logic uses it only as an asynchronous reset.
module lsort_top
  import lsort_pkg::*;
#(
  parameter int unsigned NUM_CH     = 384,
  parameter int unsigned NUM_BUF    = 16,
  parameter int unsigned CLU_DEPTH  = 384,
  parameter int unsigned WARMUP     = 25,
  parameter int unsigned CH_WIN     = 4,
  parameter int unsigned TS_WIN     = 5,
  parameter int unsigned SEND_DELAY = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] din,
  input  logic                     is_first_channel,
  input  logic [7:0]               n_th,
  input  ch_t                      clu_th,
  output logic                     sorting_out
);

  // filter -> detector
  logic                     f_la_valid, f_valid;
  ch_t                      f_la_ch, f_ch;
  ts_t                      f_ts;
  logic signed [DATA_W-1:0] f_data;

  iir_filter #(.NUM_CH(NUM_CH)) u_filter (
    .clk              (clk),
    .rst_n            (rst_n),
    .din              (din),
    .is_first_channel (is_first_channel),
    .la_valid         (f_la_valid),
    .la_ch            (f_la_ch),
    .out_valid        (f_valid),
    .out_ch           (f_ch),
    .out_ts           (f_ts),
    .out_data         (f_data)
  );

  // detector -> locator
  logic d_valid, d_peak;
  ts_t  d_ts;
  ch_t  d_ch;
  mag_t d_amp;

  peak_detector #(.NUM_CH(NUM_CH), .NTH_W(8), .NTH_FRAC(2), .WARMUP(WARMUP)) u_detector (
    .clk       (clk),
    .rst_n     (rst_n),
    .n_th      (n_th),
    .la_valid  (f_la_valid),
    .la_ch     (f_la_ch),
    .in_valid  (f_valid),
    .in_ch     (f_ch),
    .in_ts     (f_ts),
    .in_data   (f_data),
    .out_valid (d_valid),
    .out_ts    (d_ts),
    .is_peak   (d_peak),
    .pk_ch     (d_ch),
    .pk_amp    (d_amp)
  );

  // locator -> clustering
  logic       l_valid, l_ready;
  loc_spike_t l_spike;

  spike_locator #(
    .NUM_BUF(NUM_BUF), .CH_WIN(CH_WIN), .TS_WIN(TS_WIN), .SEND_DELAY(SEND_DELAY)
  ) u_locator (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_ts        (d_ts),
    .is_peak      (d_peak && d_valid),
    .pk_ch        (d_ch),
    .pk_amp       (d_amp),
    .sp_valid     (l_valid),
    .sp_ready     (l_ready),
    .sp           (l_spike),
    .peak_dropped ()
  );

  // clustering -> output
  logic    r_valid, r_ready;
  result_t r_res;

  osort_cluster #(.DEPTH(CLU_DEPTH)) u_cluster (
    .clk       (clk),
    .rst_n     (rst_n),
    .th        (clu_th),
    .sp_valid  (l_valid),
    .sp_ready  (l_ready),
    .sp        (l_spike),
    .res_valid (r_valid),
    .res_ready (r_ready),
    .res       (r_res)
  );

  result_uart u_uart (
    .clk         (clk),
    .rst_n       (rst_n),
    .res_valid   (r_valid),
    .res_ready   (r_ready),
    .res         (r_res),
    .sorting_out (sorting_out)
  );

endmodule
