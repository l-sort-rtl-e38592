// result_uart -- serialises sorting results onto the one-bit sortingOut pin.
//
// Spikes are sparse, so the whole result stream leaves the chip on one wire. The line idles
// high. A result is sent as one bit per clock cycle:
//     0 (start) | kind | payload, MSB first | 1 (at least one idle cycle)
// kind = 1 for a sorted spike, payload = 32-bit timestep then 9-bit cluster index (43 bits);
// kind = 0 for a cluster merge, payload = removed cluster index then kept cluster index
// (20 bits). The idle-high line, the one-cycle start bit, the kind bit and the payload contents
// follow the published output format; field widths, MSB-first order and the trailing idle bit
// (so that back-to-back frames stay separable) are this design's choices.
//
// Interface: one result at a time with valid/ready; ready is high only while the line idles.
// sorting_out is a register: a result accepted at one clock edge drives its start bit from
// the next edge on.
//
// Lint may report rst_n as used both synchronously and asynchronously: the assertions below
// sample it in their disable condition; the logic uses it only as an asynchronous reset.
module result_uart
  import lsort_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    res_valid,
  output logic    res_ready,
  input  result_t res,
  output logic    sorting_out
);

  localparam int unsigned SPIKE_BITS = 2 + TS_W + CH_W;   // 43
  localparam int unsigned MERGE_BITS = 2 + 2 * CH_W;      // 20
  localparam int unsigned FRAME_W    = SPIKE_BITS;
  localparam int unsigned LW         = $clog2(FRAME_W + 2);

  logic [FRAME_W-1:0] shreg_q;
  logic [LW-1:0]      left_q;   // bits still to send, including the trailing idle bit

  assign res_ready = (left_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg_q     <= '1;
      left_q      <= '0;
      sorting_out <= 1'b1;
    end else if (left_q == '0) begin
      sorting_out <= 1'b1;
      if (res_valid) begin
        if (res.kind == RES_SPIKE) begin
          shreg_q <= {1'b0, 1'b1, res.ts, res.idx_a};
          left_q  <= LW'(SPIKE_BITS + 1);
        end else begin
          shreg_q <= {1'b0, 1'b0, res.idx_a, res.idx_b, {(FRAME_W - MERGE_BITS){1'b1}}};
          left_q  <= LW'(MERGE_BITS + 1);
        end
      end
    end else begin
      sorting_out <= shreg_q[FRAME_W-1];
      shreg_q     <= {shreg_q[FRAME_W-2:0], 1'b1};
      left_q      <= left_q - 1'b1;
    end
  end

  // Between frames the line is idle high.
  a_idle_high: assert property (@(posedge clk) disable iff (!rst_n) res_ready |-> sorting_out);

endmodule
