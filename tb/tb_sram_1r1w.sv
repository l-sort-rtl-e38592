// tb_sram_1r1w -- self-checking test of the 1r1w memory at its default size (24 x 384).
// Writes every word with random data, then reads random addresses while writing others, and
// compares each read (one cycle later) with a model array. Also checks that rdata holds
// while re is low.
module tb_sram_1r1w;
  localparam int W = 24, D = 384, AW = 9;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_1r1w #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = W'($urandom); model[a] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      re = 1; raddr = AW'($urandom_range(0, D - 1));
      exp = model[raddr];
      we = 1; waddr = AW'($urandom_range(0, D - 1));
      if (waddr == raddr) waddr = AW'((int'(raddr) + 1) % D);
      wdata = W'($urandom);
      @(posedge clk); model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 5) $display("read %0d: got %h exp %h", raddr, rdata, exp);
      end
    end
    // hold while re is low
    @(negedge clk); re = 0; we = 0; exp = rdata;
    repeat (3) @(posedge clk);
    #1 checks++;
    if (rdata !== exp) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
