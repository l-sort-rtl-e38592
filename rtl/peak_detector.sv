// peak_detector -- channel-wise median thresholding with an incremental median-of-median.
//
// A filtered sample is a peak when its magnitude exceeds TH = N_th * M, where M approximates
// the median magnitude of the channel's last 25 samples. M comes from two incremental median
// stages (inc_median_stage) in series, each holding only four entries per channel:
//   * stage 1 takes every new magnitude and yields m1, the exact median of the channel's five
//     most recent magnitudes; its list is rewritten every timestep;
//   * stage 2 takes m1 as its newest sample and yields m2 = median(four stored m1 values, m1);
//     its list is rewritten only every fifth timestep, so the stored values are medians of
//     (nearly) disjoint groups of five and m2 approximates the median-of-median of 25 samples.
// The two lists (2 x 4 x (11-bit magnitude + 2-bit age) = 104 bits) are all that is stored per
// channel, in a 104 x NUM_CH 1r1w memory. The two-stage structure, the four-entry stages, the
// age counters and the update every five timesteps follow the published detector; the use of
// magnitudes, the N_th format (unsigned, NTH_FRAC fractional bits, a run-time input), the
// tie rule and the start-up handling below are this design's choices.
//
// Start-up: the memory is not cleared. In the first frame after reset every entry of both
// lists is loaded with the sample's own magnitude (ages 3..0), and no peaks are reported until
// WARMUP frames have passed. The five-timestep phase and the frame age are counted once for
// all channels, on the samples of channel 0. The frame-age counter is 6 bits, so WARMUP must
// stay below 64.
//
// Interface: the sample stream of iir_filter (in_*) plus its one-cycle look-ahead (la_*), which
// addresses the state read so that the state arrives together with the sample. Outputs are
// registered: one cycle after a sample, out_valid/out_ts repeat its slot and is_peak flags
// it, with pk_ch and pk_amp (the magnitude) of the sample. One sample per clock, no stalls.
//
// Lint may report rst_n as used both synchronously and asynchronously: the assertions below
// sample it in their disable condition; the logic uses it only as an asynchronous reset.
module peak_detector
  import lsort_pkg::*;
#(
  parameter int unsigned NUM_CH   = 384,
  parameter int unsigned NTH_W    = 8,
  parameter int unsigned NTH_FRAC = 2,
  parameter int unsigned WARMUP   = 25,
  parameter int unsigned S2_EVERY = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NTH_W-1:0]         n_th,
  input  logic                     la_valid,
  input  ch_t                      la_ch,
  input  logic                     in_valid,
  input  ch_t                      in_ch,
  input  ts_t                      in_ts,
  input  logic signed [DATA_W-1:0] in_data,
  output logic                     out_valid,
  output ts_t                      out_ts,
  output logic                     is_peak,
  output ch_t                      pk_ch,
  output mag_t                     pk_amp
);

  localparam int unsigned AW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;
  localparam int unsigned STATE_W = $bits(det_state_t);
  localparam mag_t MAG_MAX = '1;

  // ---- frame bookkeeping, shared by all channels ----
  logic       started_q;
  logic [2:0] phase_q, phase;
  logic [5:0] age_q, age;
  logic       new_frame, act, init;

  always_comb begin
    new_frame = in_valid && (in_ch == '0);
    act       = in_valid && (started_q || new_frame);
    phase     = phase_q;
    age       = age_q;
    if (new_frame) begin
      if (!started_q) begin
        phase = '0;
        age   = '0;
      end else begin
        phase = (32'(phase_q) == S2_EVERY - 1) ? '0 : phase_q + 1'b1;
        age   = (32'(age_q) >= WARMUP) ? age_q : age_q + 1'b1;
      end
    end
    init = (age == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started_q <= 1'b0;
      phase_q   <= '0;
      age_q     <= '0;
    end else if (new_frame) begin
      started_q <= 1'b1;
      phase_q   <= phase;
      age_q     <= age;
    end
  end

  // ---- magnitude ----
  mag_t mag;
  always_comb begin
    logic [DATA_W-1:0] a;
    a   = in_data[DATA_W-1] ? DATA_W'(-in_data) : DATA_W'(in_data);
    mag = (a > DATA_W'(MAG_MAX)) ? MAG_MAX : a[MAG_W-1:0];
  end

  // ---- state memory ----
  det_state_t st_rd, st_cur, st_new;
  logic [STATE_W-1:0] st_rdata;

  sram_1r1w #(.WIDTH(STATE_W), .DEPTH(NUM_CH)) u_state (
    .clk   (clk),
    .we    (act),
    .waddr (in_ch[AW-1:0]),
    .wdata (st_new),
    .re    (la_valid),
    .raddr (la_ch[AW-1:0]),
    .rdata (st_rdata)
  );

  assign st_rd = det_state_t'(st_rdata);

  always_comb begin
    st_cur = st_rd;
    if (init) begin
      for (int i = 0; i < MED_ENTRIES; i++) begin
        st_cur.s1[i].mag = mag;
        st_cur.s1[i].cnt = CNT_W'(MED_ENTRIES - 1 - i);
        st_cur.s2[i].mag = mag;
        st_cur.s2[i].cnt = CNT_W'(MED_ENTRIES - 1 - i);
      end
    end
  end

  // ---- the two median stages ----
  mag_t      m1, m2;
  med_list_t s1_next, s2_next;

  inc_median_stage u_stage1 (.list_in(st_cur.s1), .x(mag), .median(m1), .list_out(s1_next));
  inc_median_stage u_stage2 (.list_in(st_cur.s2), .x(m1),  .median(m2), .list_out(s2_next));

  always_comb begin
    st_new.s1 = s1_next;
    st_new.s2 = (32'(phase) == S2_EVERY - 1) ? s2_next : st_cur.s2;
  end

  // ---- threshold and comparison ----
  logic [MAG_W+NTH_W-1:0] prod;
  logic                   peak;
  always_comb begin
    prod = (MAG_W+NTH_W)'(n_th) * (MAG_W+NTH_W)'(m2);
    peak = act && (32'(age) >= WARMUP) && ((MAG_W+NTH_W)'(mag) > (prod >> NTH_FRAC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      is_peak   <= 1'b0;
    end else begin
      out_valid <= act;
      is_peak   <= peak;
    end
  end

  always_ff @(posedge clk) begin
    if (act) begin
      out_ts <= in_ts;
      pk_ch  <= in_ch;
      pk_amp <= mag;
    end
  end

  // Interface rule of the look-ahead: a channel announced on la_* arrives on in_* next cycle.
  a_lookahead: assert property (@(posedge clk) disable iff (!rst_n)
    la_valid |=> in_valid && in_ch == $past(la_ch));

endmodule
