// sram_1r1w -- one-read one-write synchronous memory (the filter and detector state stores).
//
// Stands for a compiled 1r1w SRAM macro: one write port and one read port, both on the
// rising clock edge. A read returns the word on the next cycle (registered output, held while
// re is low). Reading and writing the same address in one cycle returns the old word; the
// sorter never does that, since a channel's word is rewritten one cycle after it is read and
// read again only a full frame later. No reset: contents start undefined, as in an SRAM, and
// the users write every word before they read it.
// The memory type and the default size (24 x 384, the filter's state store; the detector uses
// 104 x 384) follow the published memory breakdown; the array model and its read timing are
// this design's own.
module sram_1r1w #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 384,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
