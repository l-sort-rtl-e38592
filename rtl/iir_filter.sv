// iir_filter -- channel-interleaved band-pass IIR filter (first stage of the sorter).
//
// Removes local field potentials and high-frequency noise. The filter is the first-order
// Butterworth band-pass 300 Hz - 6 kHz at 30 kHz sampling, which has a second-order
// denominator, realised in Direct Form II:
//     w[n] = x[n] - a1*w[n-1] - a2*w[n-2]
//     y[n] = b0*w[n] + b1*w[n-1] + b2*w[n-2]
// with 12-bit signed coefficients carrying 10 fractional bits (each product is shifted
// right arithmetically by 10, i.e. floored). Filter type, band, form and coefficient format
// follow the published design; the coefficient values are the bilinear-transform Butterworth
// values rounded to that format (b0 = -b2 = 0.4046, b1 = 0, a1 = -1.1376, a2 = 0.1908).
//
// All channels share one datapath. The two delay elements of each channel, w[n-1] and w[n-2],
// are 12-bit words kept together in a 24-bit x NUM_CH 1r1w memory (the published filter
// memory size); w[n] and y[n] saturate to 12 bits.
//
// Interface: one sample per clock on din; is_first_channel marks the sample of channel 0 and
// starts a new timestep. Samples before the first is_first_channel, or past NUM_CH-1 without a
// new is_first_channel, are ignored. The channel index is counted here and travels with the
// sample, as does the timestep (frames since the first is_first_channel). During the first
// frame the delay elements read as zero, so the memory needs no clearing.
//
// Timing: the result appears two cycles after its input (out_*). la_valid / la_ch announce, one
// cycle ahead, the channel whose result will appear on the next cycle, so the next stage can
// start its own memory read in time.
module iir_filter
  import lsort_pkg::*;
#(
  parameter int unsigned NUM_CH = 384,
  parameter int signed   B0 = 414,
  parameter int signed   B1 = 0,
  parameter int signed   B2 = -414,
  parameter int signed   A1 = -1165,
  parameter int signed   A2 = 195,
  parameter int unsigned COEF_FRAC = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] din,
  input  logic                     is_first_channel,
  output logic                     la_valid,
  output ch_t                      la_ch,
  output logic                     out_valid,
  output ch_t                      out_ch,
  output ts_t                      out_ts,
  output logic signed [DATA_W-1:0] out_data
);

  localparam int unsigned AW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;
  localparam int signed SMAX = (1 <<< (DATA_W - 1)) - 1;
  localparam int signed SMIN = -(1 <<< (DATA_W - 1));

  function automatic logic signed [DATA_W-1:0] sat(input logic signed [31:0] v);
    if (v > SMAX)      return DATA_W'(SMAX);
    else if (v < SMIN) return DATA_W'(SMIN);
    else               return v[DATA_W-1:0];
  endfunction

  // ---- stage 0: channel / timestep counting, state read ----
  logic synced_q, first_frame_q;
  ch_t  ch_q;
  ts_t  ts_q;
  logic in_valid;
  ch_t  in_ch;

  always_comb begin
    in_ch    = is_first_channel ? '0 : ch_t'(ch_q + 1'b1);
    in_valid = is_first_channel || (synced_q && (32'(ch_q) + 1 < NUM_CH));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      synced_q      <= 1'b0;
      first_frame_q <= 1'b1;
      ch_q          <= '1;
      ts_q          <= '0;
    end else begin
      if (is_first_channel) begin
        synced_q      <= 1'b1;
        first_frame_q <= !synced_q;
        ts_q          <= synced_q ? ts_q + 1'b1 : '0;
      end
      if (in_valid) ch_q <= in_ch;
      else if (synced_q && !is_first_channel) synced_q <= 1'b0;  // overrun: wait for resync
    end
  end

  // ---- stage 1: filter arithmetic, state write ----
  logic                     s1_valid, s1_zero_state;
  ch_t                      s1_ch;
  ts_t                      s1_ts;
  logic signed [DATA_W-1:0] s1_x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_x          <= din;
      s1_ch         <= in_ch;
      s1_ts         <= is_first_channel ? (synced_q ? ts_q + 1'b1 : '0) : ts_q;
      s1_zero_state <= is_first_channel ? !synced_q : first_frame_q;
    end
  end

  logic [2*DATA_W-1:0] st_rdata, st_wdata;
  logic signed [DATA_W-1:0] w1, w2, w0, y0;
  logic signed [31:0] fb, ff;

  always_comb begin
    w1 = s1_zero_state ? '0 : st_rdata[2*DATA_W-1:DATA_W];
    w2 = s1_zero_state ? '0 : st_rdata[DATA_W-1:0];
    fb = (A1 * 32'(w1) + A2 * 32'(w2)) >>> COEF_FRAC;
    w0 = sat(32'(s1_x) - fb);
    ff = (B0 * 32'(w0) + B1 * 32'(w1) + B2 * 32'(w2)) >>> COEF_FRAC;
    y0 = sat(ff);
    st_wdata = {w0, w1};
  end

  sram_1r1w #(.WIDTH(2 * DATA_W), .DEPTH(NUM_CH)) u_state (
    .clk   (clk),
    .we    (s1_valid),
    .waddr (s1_ch[AW-1:0]),
    .wdata (st_wdata),
    .re    (in_valid),
    .raddr (in_ch[AW-1:0]),
    .rdata (st_rdata)
  );

  assign la_valid = s1_valid;
  assign la_ch    = s1_ch;

  // ---- stage 2: output register ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      out_ch   <= s1_ch;
      out_ts   <= s1_ts;
      out_data <= y0;
    end
  end

endmodule
