// tb_result_uart -- self-checking test of the sortingOut serialiser.
// Random spike and merge results, offered back-to-back or with gaps. A receiver written from
// the frame format (idle high; start 0; kind; spike: 32-bit timestep + 9-bit cluster, merge:
// two 9-bit clusters; MSB first; one bit per clock) decodes the pin and compares each frame
// with what was offered. Also checks that the start bit comes one cycle after acceptance
// and that ready is low while a frame is on the wire.
module tb_result_uart;
  import lsort_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, res_valid, res_ready, sorting_out;
  result_t res;
  int checks = 0, failures = 0;

  result_uart dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  result_t sent [$];
  int acc_cyc [$];
  int cyc = 0;
  int n_spike = 0, n_merge = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && res_valid && res_ready) begin sent.push_back(res); acc_cyc.push_back(cyc); end
  end

  // receiver
  initial begin
    logic [40:0] bits;
    logic kind;
    result_t e;
    int c0;
    @(posedge rst_n);
    forever begin
      @(posedge clk);
      #1;
      if (sorting_out == 1'b0) begin
        c0 = cyc;
        checks++;
        if (acc_cyc.size() == 0 || c0 - acc_cyc[0] != 2) begin
          failures++;
          $display("start bit at %0d, accepted at %0d", c0, acc_cyc.size() ? acc_cyc[0] : -1);
        end
        void'(acc_cyc.pop_front());
        @(posedge clk); #1 kind = sorting_out;
        checks++;
        if (res_ready) failures++;
        for (int i = 0; i < (kind ? 41 : 18); i++) begin
          @(posedge clk); #1 bits = {bits[39:0], sorting_out};
        end
        e = sent.pop_front();
        checks++;
        if (kind) begin
          n_spike++;
          if (e.kind != RES_SPIKE || bits[40:9] != e.ts || bits[8:0] != e.idx_a) begin
            failures++; $display("spike frame mismatch");
          end
        end else begin
          n_merge++;
          if (e.kind != RES_MERGE || bits[17:9] != e.idx_a || bits[8:0] != e.idx_b) begin
            failures++; $display("merge frame mismatch");
          end
        end
        @(posedge clk); #1;
        checks++;
        if (sorting_out != 1'b1) begin failures++; $display("no idle bit after frame"); end
      end
    end
  end

  initial begin
    rst_n = 0; res_valid = 0; res = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (sorting_out != 1'b1) failures++;   // idles high
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      res_valid = 1;
      res.kind = res_kind_e'($urandom_range(0, 1));
      res.ts = ts_t'($urandom);
      res.idx_a = ch_t'($urandom);
      res.idx_b = ch_t'($urandom);
      do @(posedge clk); while (!res_ready);
      #1 res_valid = 0;
      repeat ($urandom_range(0, 1) ? 0 : $urandom_range(1, 30)) @(negedge clk);
    end
    repeat (60) @(negedge clk);
    checks++;
    if (sent.size() != 0 || n_spike == 0 || n_merge == 0) failures++;
    $display("spikes %0d merges %0d", n_spike, n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
