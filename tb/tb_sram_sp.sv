// tb_sram_sp -- self-checking test of the single-port memory at its default size (9 x 384).
// Random mix of writes and reads through the one port, each read compared one cycle later
// with a model array; also checks that rdata holds during writes and idle cycles.
module tb_sram_sp;
  localparam int W = 9, D = 384, AW = 9;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en, we;
  logic [AW-1:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_sp #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp;
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = AW'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); en = 1; we = 0; addr = 0; exp = model[0];
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 5) $display("got %h exp %h", rdata, exp);
      end
      en = ($urandom_range(0, 3) != 0);
      we = ($urandom_range(0, 1) == 0);
      addr = AW'($urandom_range(0, D - 1));
      wdata = W'($urandom);
      if (en && we) model[addr] = wdata;
      else if (en) exp = model[addr];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
