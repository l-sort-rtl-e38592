// osort_cluster -- online (O-Sort style) clustering of located spikes by position.
//
// Every spike arrives with its position, the index of its central channel. A cluster is a
// position too: the cluster table holds one 9-bit centre per cluster (DEPTH = 384 entries, a
// single-port memory, a free entry holding all ones). The cluster index is the table address.
// For each spike at position p:
//   1. scan: read every allocated entry, one per cycle, and find the cluster whose centre is
//      nearest to p (ties: lowest index) and the first free entry;
//   2. if the nearest centre is within the threshold th (|centre - p| <= th), the spike joins
//      that cluster, whose centre moves half-way to p: c' = (c + p + 1) >> 1. Otherwise a new
//      cluster is opened at p, in the first free entry (or the next never-used one); if the
//      table is full the spike joins the nearest cluster anyway;
//   3. the result (spike timestep, cluster index) is emitted;
//   4. only when an existing cluster moved: scan again for the cluster nearest to c' other than
//      itself; if it lies within th the two clusters merge. The lower index survives with
//      centre (c' + c_other + 1) >> 1, the higher entry is freed, and a merge result (removed
//      index, kept index) is emitted.
// Assigning to the nearest cluster, updating it and merging it with a similar cluster follow
// the published clustering scheme, as does the programmable fixed distance threshold in place
// of one computed on the fly. The table layout, the half-way centre update (there is no room
// for member counts in a 9-bit word), nearest-cluster selection and the merge bookkeeping are
// this design's choices.
//
// Interface: spikes in with valid/ready (accepted only when idle), results out with
// valid/ready (held until accepted). Timing: a spike costs about n + 4 cycles up to its result,
// n being the number of table entries ever used, plus n + 4 more when a merge check runs.
//
// Lint may report rst_n as used both synchronously and asynchronously: the assertions below
// sample it in their disable condition; the logic uses it only as an asynchronous reset.
module osort_cluster
  import lsort_pkg::*;
#(
  parameter int unsigned DEPTH = 384
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ch_t        th,
  input  logic       sp_valid,
  output logic       sp_ready,
  input  loc_spike_t sp,
  output logic       res_valid,
  input  logic       res_ready,
  output result_t    res
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned NW = $clog2(DEPTH + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_SCAN1, S_DECIDE, S_EMIT_SPIKE, S_SCAN2, S_MERGE_KEEP, S_MERGE_FREE, S_EMIT_DONE
  } state_e;

  state_e  state_q;
  ts_t     ts_q;
  ch_t     p_q;          // spike position, later the moved centre c'
  ch_t     k_q;          // cluster of the spike
  logic [NW-1:0] n_alloc_q;  // entries ever used
  logic [NW-1:0] issue_q;    // next address to read in a scan
  logic    rd_v_q;
  ch_t     rd_idx_q;
  logic    best_v_q;
  ch_t     best_idx_q, best_c_q, best_d_q;
  logic    free_v_q;
  ch_t     free_idx_q;

  // ---- memory port ----
  logic    m_en, m_we;
  ch_t     m_addr, m_wdata, m_rdata;

  sram_sp #(.WIDTH(CH_W), .DEPTH(DEPTH)) u_table (
    .clk   (clk),
    .en    (m_en),
    .we    (m_we),
    .addr  (m_addr[AW-1:0]),
    .wdata (m_wdata),
    .rdata (m_rdata)
  );

  function automatic ch_t absdiff(input ch_t a, input ch_t b);
    return (a >= b) ? a - b : b - a;
  endfunction

  function automatic ch_t halfway(input ch_t a, input ch_t b);
    return ch_t'(({1'b0, a} + {1'b0, b} + 1'b1) >> 1);
  endfunction

  logic scanning, issuing, scan_done;
  ch_t  d_cur, new_centre;
  logic take;

  always_comb begin
    scanning  = (state_q == S_SCAN1) || (state_q == S_SCAN2);
    issuing   = scanning && (issue_q < n_alloc_q);
    scan_done = scanning && !issuing && !rd_v_q;
    d_cur     = absdiff(m_rdata, p_q);
    take      = rd_v_q && (m_rdata != CLU_FREE) && !(state_q == S_SCAN2 && rd_idx_q == k_q)
                && (!best_v_q || d_cur < best_d_q);
    new_centre = halfway(best_c_q, p_q);

    m_en    = 1'b0;
    m_we    = 1'b0;
    m_addr  = ch_t'(issue_q);
    m_wdata = '0;
    if (issuing) begin
      m_en = 1'b1;
    end else if (state_q == S_DECIDE) begin
      m_en    = 1'b1;
      m_we    = 1'b1;
      if (best_v_q && best_d_q <= th) begin
        m_addr  = best_idx_q;
        m_wdata = new_centre;
      end else begin
        m_addr  = free_v_q ? free_idx_q
                : (32'(n_alloc_q) < DEPTH) ? ch_t'(n_alloc_q) : best_idx_q;
        m_wdata = (!free_v_q && 32'(n_alloc_q) >= DEPTH) ? new_centre : p_q;
      end
    end else if (state_q == S_MERGE_KEEP) begin
      m_en    = 1'b1;
      m_we    = 1'b1;
      m_addr  = (k_q < best_idx_q) ? k_q : best_idx_q;
      m_wdata = new_centre;
    end else if (state_q == S_MERGE_FREE) begin
      m_en    = 1'b1;
      m_we    = 1'b1;
      m_addr  = (k_q < best_idx_q) ? best_idx_q : k_q;
      m_wdata = CLU_FREE;
    end
  end

  assign sp_ready = (state_q == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      n_alloc_q  <= '0;
      issue_q    <= '0;
      rd_v_q     <= 1'b0;
      rd_idx_q   <= '0;
      best_v_q   <= 1'b0;
      best_idx_q <= '0;
      best_c_q   <= '0;
      best_d_q   <= '0;
      free_v_q   <= 1'b0;
      free_idx_q <= '0;
      ts_q       <= '0;
      p_q        <= '0;
      k_q        <= '0;
      res_valid  <= 1'b0;
      res        <= '0;
    end else begin
      rd_v_q   <= issuing;
      rd_idx_q <= ch_t'(issue_q);
      if (issuing) issue_q <= issue_q + 1'b1;
      if (take) begin
        best_v_q   <= 1'b1;
        best_idx_q <= rd_idx_q;
        best_c_q   <= m_rdata;
        best_d_q   <= d_cur;
      end
      if (state_q == S_SCAN1 && rd_v_q && m_rdata == CLU_FREE && !free_v_q) begin
        free_v_q   <= 1'b1;
        free_idx_q <= rd_idx_q;
      end

      unique case (state_q)
        S_IDLE: begin
          if (sp_valid) begin
            ts_q     <= sp.ts;
            p_q      <= sp.ch;
            issue_q  <= '0;
            best_v_q <= 1'b0;
            free_v_q <= 1'b0;
            state_q  <= S_SCAN1;
          end
        end
        S_SCAN1: if (scan_done) state_q <= S_DECIDE;
        S_DECIDE: begin
          res_valid   <= 1'b1;
          res.kind    <= RES_SPIKE;
          res.ts      <= ts_q;
          res.idx_b   <= '0;
          if (best_v_q && best_d_q <= th) begin
            // joins an existing cluster, which moves: check for a merge afterwards
            k_q       <= best_idx_q;
            res.idx_a <= best_idx_q;
            p_q       <= new_centre;
            state_q   <= S_EMIT_SPIKE;
          end else begin
            res.idx_a <= m_addr;
            k_q       <= m_addr;
            if (!free_v_q && 32'(n_alloc_q) < DEPTH) n_alloc_q <= n_alloc_q + 1'b1;
            // a new cluster cannot be within th of another one: no merge check
            p_q     <= m_wdata;
            state_q <= (!free_v_q && 32'(n_alloc_q) >= DEPTH) ? S_EMIT_SPIKE : S_EMIT_DONE;
          end
        end
        S_EMIT_SPIKE: begin
          if (res_ready) begin
            res_valid <= 1'b0;
            issue_q   <= '0;
            best_v_q  <= 1'b0;
            state_q   <= S_SCAN2;
          end
        end
        S_SCAN2: begin
          if (scan_done) begin
            state_q <= (best_v_q && best_d_q <= th) ? S_MERGE_KEEP : S_IDLE;
          end
        end
        S_MERGE_KEEP: state_q <= S_MERGE_FREE;
        S_MERGE_FREE: begin
          res_valid <= 1'b1;
          res.kind  <= RES_MERGE;
          res.ts    <= ts_q;
          res.idx_a <= (k_q < best_idx_q) ? best_idx_q : k_q;
          res.idx_b <= (k_q < best_idx_q) ? k_q : best_idx_q;
          state_q   <= S_EMIT_DONE;
        end
        S_EMIT_DONE: begin
          if (res_ready) begin
            res_valid <= 1'b0;
            state_q   <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // An offered result stays on the output, unchanged, until the output stage takes it.
  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res));

endmodule
