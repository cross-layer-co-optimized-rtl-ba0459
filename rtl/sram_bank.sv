// sram_bank: one bank of the on-chip parameter memory.
//
// Single-port synchronous SRAM, DEPTH words of WIDTH bits: with en high a
// write (we=1) stores wdata at addr, a read (we=0) returns the word on
// rdata one clock later. rdata keeps its value while en is low or during a
// write. In silicon this bank is a compiled macro kept as a black box by
// synthesis; this array model has the same ports and timing. The
// one-cycle read latency and the hold behaviour are this design's
// assumptions about that macro.
module sram_bank #(
  parameter int unsigned DEPTH  = 102,
  parameter int unsigned WIDTH  = 113,
  parameter int unsigned ADDR_W = 7
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
