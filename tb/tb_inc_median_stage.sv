// tb_inc_median_stage -- self-checking test of one incremental median stage.
// Random sorted four-entry lists (ages a random permutation of 0..3, magnitudes often equal
// to provoke ties) and random new samples. Expected values come from sorting: the median is
// element 2 of the five sorted magnitudes; the new list must be sorted by magnitude and hold
// exactly the stored entries except the age-0 one, aged by one, plus the new sample with age 3.
module tb_inc_median_stage;
  import lsort_pkg::*;

  med_list_t list_in, list_out;
  mag_t x, median;
  int checks = 0, failures = 0;

  inc_median_stage dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    int mags[$], five[$], exp_pairs[$], got_pairs[$];
    int perm[4];
    for (int n = 0; n < 20000; n++) begin
      mags = {};
      for (int i = 0; i < 4; i++)
        mags.push_back((n % 3 == 0) ? $urandom_range(0, 6) : $urandom_range(0, 2047));
      mags.sort();
      perm = '{0, 1, 2, 3};
      perm.shuffle();
      for (int i = 0; i < 4; i++) begin
        list_in[i].mag = mag_t'(mags[i]);
        list_in[i].cnt = 2'(perm[i]);
      end
      x = mag_t'((n % 3 == 0) ? $urandom_range(0, 6) : $urandom_range(0, 2047));
      #1;
      five = mags;
      five.push_back(int'(x));
      five.sort();
      checks++;
      if (int'(median) != five[2]) begin
        failures++;
        if (failures < 10) $display("median got %0d exp %0d", median, five[2]);
      end
      // sortedness
      checks++;
      for (int i = 0; i < 3; i++)
        if (list_out[i].mag > list_out[i+1].mag) begin
          failures++;
          break;
        end
      // contents
      exp_pairs = {};
      got_pairs = {};
      for (int i = 0; i < 4; i++) begin
        if (perm[i] != 0) exp_pairs.push_back(mags[i] * 4 + perm[i] - 1);
        got_pairs.push_back(int'(list_out[i].mag) * 4 + int'(list_out[i].cnt));
      end
      exp_pairs.push_back(int'(x) * 4 + 3);
      exp_pairs.sort();
      got_pairs.sort();
      checks++;
      if (exp_pairs != got_pairs) begin
        failures++;
        if (failures < 10) $display("list mismatch at n=%0d", n);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
