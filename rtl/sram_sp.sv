// sram_sp -- single-port synchronous memory (the clustering module's cluster table).
//
// Stands for a compiled single-port SRAM macro: one address, one access per cycle, either a
// write (en & we) or a read (en & !we) whose data appears on rdata the next cycle and is held
// until the next read. No reset, as in an SRAM.
// The single-port type and the 9 x 384 default follow the published memory breakdown; the
// array model and its read timing are this design's own.
module sram_sp #(
  parameter int unsigned WIDTH = 9,
  parameter int unsigned DEPTH = 384,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
