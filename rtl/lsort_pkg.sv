// lsort_pkg -- widths, record types and constants shared by the spike-sorter blocks.
//
// The sorter handles channel-interleaved 12-bit samples (one sample of one channel per clock).
// Peak magnitudes are kept in 11 bits, timesteps in 32 bits and channel / cluster indices in
// 9 bits (up to 512 channels). With these widths one peak-detector memory word holds two
// median stages of four 13-bit entries (104 bits) and one spike-bank buffer holds 52 bits
// (16 buffers = 104 bytes), the figures the design is sized by. The magnitude and timestep
// widths are this design's reading of those totals; the 12-bit input and 9-bit cluster
// memory word follow the published sizes directly.
package lsort_pkg;

  localparam int unsigned DATA_W = 12;  // input / filtered sample, two's complement
  localparam int unsigned MAG_W  = 11;  // |sample|, saturated
  localparam int unsigned TS_W   = 32;  // timestep (one per frame of all channels)
  localparam int unsigned CH_W   = 9;   // channel index, also cluster index
  localparam int unsigned CNT_W  = 2;   // age counter of one median-stage entry
  localparam int unsigned MED_ENTRIES = 4;  // stored samples per median stage (N-1, N = 5)

  typedef logic [MAG_W-1:0] mag_t;
  typedef logic [TS_W-1:0]  ts_t;
  typedef logic [CH_W-1:0]  ch_t;

  // One stored sample of an incremental median stage: magnitude and age counter.
  // The newest entry has age MED_ENTRIES-1, the oldest has age 0.
  typedef struct packed {
    mag_t             mag;
    logic [CNT_W-1:0] cnt;
  } med_entry_t;

  typedef med_entry_t [MED_ENTRIES-1:0] med_list_t;  // [0] smallest .. [3] largest

  // Per-channel detector state: second (slow) stage above first (fast) stage, 104 bits.
  typedef struct packed {
    med_list_t s2;
    med_list_t s1;
  } det_state_t;

  // One spike-bank buffer: timestep, channel and amplitude of the spike's largest peak.
  typedef struct packed {
    ts_t  ts;
    ch_t  ch;
    mag_t amp;
  } spike_t;

  // A located spike as handed to clustering: time and central channel (its position).
  typedef struct packed {
    ts_t ts;
    ch_t ch;
  } loc_spike_t;

  // A sorting result: a spike attributed to a cluster, or two clusters merged.
  typedef enum logic {RES_MERGE = 1'b0, RES_SPIKE = 1'b1} res_kind_e;

  typedef struct packed {
    res_kind_e kind;
    ts_t       ts;     // spike timestep (RES_SPIKE only)
    ch_t       idx_a;  // RES_SPIKE: cluster of the spike; RES_MERGE: cluster removed
    ch_t       idx_b;  // RES_MERGE: cluster kept; unused for RES_SPIKE
  } result_t;

  // Marks a free entry of the cluster table (channel positions are below 384).
  localparam ch_t CLU_FREE = '1;

endpackage
