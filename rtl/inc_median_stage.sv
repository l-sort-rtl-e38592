// inc_median_stage -- one incremental median stage over the five most recent samples.
//
// The stage keeps the four previous samples of a channel sorted by magnitude, each with an
// age counter (3 = newest .. 0 = oldest). For a new sample x it
//   * counts the stored samples not larger than x: that count is the insert index of x;
//   * reads the median of the five samples (four stored plus x) straight from the sorted
//     list: list[2] if x goes above it, x if x lands in the middle, otherwise list[1];
//   * finds the oldest stored sample (age 0), drops it, ages the others by one, and inserts
//     x with age N-2 = 3 at its place, so the list stays sorted. The output list is formed by
//     multiplexers steered by the insert index and the oldest index.
// This is the "compare the new sample with every stored one" scheme: four comparators replace
// a full sort. The mechanism follows the published incremental median calculator; the tie rule
// (x goes above stored samples of equal magnitude) is this design's choice.
//
// Purely combinational; the caller stores the list (per channel, in memory) and decides
// whether to write the updated list back. The input list must be sorted and hold the ages
// 0..3 once each.
module inc_median_stage
  import lsort_pkg::*;
(
  input  med_list_t list_in,
  input  mag_t      x,
  output mag_t      median,
  output med_list_t list_out
);

  localparam int unsigned N = MED_ENTRIES + 1;  // samples per median: 5

  logic [2:0] ins;       // insert index of x in the five-entry merged list
  logic [2:0] old_idx;   // index of the oldest stored entry in the stored list
  logic [2:0] old_pos;   // its index in the merged list
  med_entry_t merged [N];

  always_comb begin
    ins = '0;
    for (int i = 0; i < MED_ENTRIES; i++) begin
      if (list_in[i].mag <= x) ins = ins + 1'b1;
    end

    old_idx = '0;
    for (int i = 0; i < MED_ENTRIES; i++) begin
      if (list_in[i].cnt == '0) old_idx = 3'(i);
    end
    old_pos = (old_idx < ins) ? old_idx : old_idx + 1'b1;

    if (ins > 3'd2)       median = list_in[2].mag;
    else if (ins == 3'd2) median = x;
    else                  median = list_in[1].mag;

    for (int j = 0; j < N; j++) begin
      if (j < int'(ins)) begin
        merged[j] = list_in[j];
        merged[j].cnt = list_in[j].cnt - 1'b1;
      end else if (j == int'(ins)) begin
        merged[j].mag = x;
        merged[j].cnt = CNT_W'(N - 2);
      end else begin
        merged[j] = list_in[(j > 0) ? j - 1 : 0];
        merged[j].cnt = list_in[(j > 0) ? j - 1 : 0].cnt - 1'b1;
      end
    end

    for (int j = 0; j < MED_ENTRIES; j++) begin
      list_out[j] = (j < int'(old_pos)) ? merged[j] : merged[j+1];
    end
  end

endmodule
