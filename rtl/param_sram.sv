// param_sram: the accelerator's parameter memory, 102 words of 25
// parameters (25*PB bits).
//
// Two banks of equal depth and width hold one word together: the low half
// of the word's bits in bank 0, the high half (padded to the same width)
// in bank 1. Both banks see the same address and enables, so the pair
// behaves as one single-port memory with a one-cycle read. The split into
// two equal banks is the paper's; splitting by bits is this design's
// choice. Memory map: gate words 0..79, FC1 neurons 80..99, FC2 neurons
// 100..101.
module param_sram
  import lstm_pkg::*;
#(
  parameter int unsigned PB = 9
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic                  we,
  input  logic [ADDR_W-1:0]     addr,
  input  logic [N_SLOTS*PB-1:0] wdata,
  output logic [N_SLOTS*PB-1:0] rdata
);
  localparam int unsigned WW = N_SLOTS * PB;
  localparam int unsigned BW = (WW + 1) / 2;

  logic [2*BW-1:0] wpad, rpad;
  assign wpad  = (2*BW)'(wdata);
  assign rdata = rpad[WW-1:0];

  sram_bank #(.DEPTH(MEM_DEPTH), .WIDTH(BW), .ADDR_W(ADDR_W)) u_bank0 (
    .clk, .en, .we, .addr, .wdata(wpad[BW-1:0]), .rdata(rpad[BW-1:0]));
  sram_bank #(.DEPTH(MEM_DEPTH), .WIDTH(BW), .ADDR_W(ADDR_W)) u_bank1 (
    .clk, .en, .we, .addr, .wdata(wpad[2*BW-1:BW]), .rdata(rpad[2*BW-1:BW]));
endmodule
