// tb_iir_filter -- self-checking test of the channel-interleaved band-pass filter.
// Five channels (NUM_CH overridden to keep the run short), one sample per clock:
//   ch 0: 3 kHz sine, amplitude 200 (in band)   -> output amplitude must stay within 15 %
//   ch 1: constant 100 (DC, out of band)        -> output must decay below 3
//   ch 2: 100 Hz sine, amplitude 300 (below band) -> output amplitude must be below 35 %
//   ch 3, 4: random samples over the full 12-bit range (exercises saturation)
// Every output is also compared bit for bit with a per-channel Direct Form II model with the
// same coefficient format, and its timing is checked: result 2 cycles after its input,
// look-ahead 1 cycle after, channel index and timestep carried along. Samples before the first
// is_first_channel must produce nothing.
module tb_iir_filter;
  import lsort_pkg::*;
  localparam int NCH = 5;
  localparam real FS = 30000.0;
  localparam real PI = 3.14159265358979;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic signed [DATA_W-1:0] din;
  logic is_first_channel;
  logic la_valid, out_valid;
  ch_t la_ch, out_ch;
  ts_t out_ts;
  logic signed [DATA_W-1:0] out_data;
  int checks = 0, failures = 0;

  iir_filter #(.NUM_CH(NCH)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat12(int v);
    return (v > 2047) ? 2047 : (v < -2048) ? -2048 : v;
  endfunction

  int w1 [NCH], w2 [NCH];
  // expected outputs, indexed by the cycle they must appear in
  int exp_y [int], exp_ch [int], exp_ts [int], exp_la [int];
  int cyc = 0;
  int max_abs [NCH];
  localparam int FRAMES = 3000;

  always @(posedge clk) cyc <= cyc + 1;

  // monitor
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== exp_y.exists(cyc)) begin
        failures++;
        if (failures < 10) $display("cyc %0d: out_valid %0b unexpected", cyc, out_valid);
      end else if (out_valid) begin
        if (int'(out_data) != exp_y[cyc] || int'(out_ch) != exp_ch[cyc] || int'(out_ts) != exp_ts[cyc]) begin
          failures++;
          if (failures < 10) $display("cyc %0d: y %0d exp %0d ch %0d/%0d ts %0d/%0d", cyc,
                                      out_data, exp_y[cyc], out_ch, exp_ch[cyc], out_ts, exp_ts[cyc]);
        end
        if (exp_ts[cyc] > FRAMES / 2 && exp_ch[cyc] < 3) begin
          if ((out_data < 0 ? -int'(out_data) : int'(out_data)) > max_abs[exp_ch[cyc]])
            max_abs[exp_ch[cyc]] = (out_data < 0) ? -int'(out_data) : int'(out_data);
        end
      end
      checks++;
      if (la_valid !== exp_la.exists(cyc) || (la_valid && int'(la_ch) != exp_la[cyc])) begin
        failures++;
        if (failures < 10) $display("cyc %0d: look-ahead wrong", cyc);
      end
    end
  end

  initial begin
    int x, w0, y;
    rst_n = 0; din = 0; is_first_channel = 0;
    for (int c = 0; c < NCH; c++) begin w1[c] = 0; w2[c] = 0; max_abs[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // samples before synchronisation are ignored
    repeat (4) begin @(negedge clk); din = 12'sd77; end
    for (int t = 0; t < FRAMES; t++) begin
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        case (c)
          0: x = $rtoi(200.0 * $sin(2.0 * PI * 3000.0 * t / FS));
          1: x = 100;
          2: x = $rtoi(300.0 * $sin(2.0 * PI * 100.0 * t / FS));
          default: x = $urandom_range(0, 4095) - 2048;
        endcase
        din = DATA_W'(x);
        is_first_channel = (c == 0);
        w0 = sat12(x - ((-1165 * w1[c] + 195 * w2[c]) >>> 10));
        y  = sat12((414 * w0 + 0 * w1[c] - 414 * w2[c]) >>> 10);
        w2[c] = w1[c];
        w1[c] = w0;
        exp_la[cyc + 1] = c;
        exp_y[cyc + 2] = y;
        exp_ch[cyc + 2] = c;
        exp_ts[cyc + 2] = t;
      end
    end
    @(negedge clk); is_first_channel = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (max_abs[0] < 170 || max_abs[0] > 230) begin
      failures++; $display("in-band amplitude %0d", max_abs[0]);
    end
    checks++;
    if (max_abs[1] > 3) begin failures++; $display("DC leak %0d", max_abs[1]); end
    checks++;
    if (max_abs[2] > 105) begin failures++; $display("100 Hz leak %0d", max_abs[2]); end
    $display("amplitudes: 3k %0d, DC %0d, 100Hz %0d", max_abs[0], max_abs[1], max_abs[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
