// lstm_accel_top: LSTM accelerator for real-time gait analysis.
//
// Three blocks: the parameter SRAM (two banks, 102 words of 25
// parameters), the control logic (a counter that walks the fixed
// schedule) and the LSTM NN block (shared dot product, activation and
// cell-update datapath with the state registers). The host first writes
// the 2462 parameters with wr_rd = 1 through the MEM port (mem_en,
// mem_addr, mem_wdata; one word per cycle, word layout in lstm_pkg). With
// wr_rd = 0 it then offers one sample per x_rdy: X_t is four channels of
// FxP(10,8), packed channel 0 in the low bits, valid in the cycle x_rdy is
// high and taken at the start of a sample. After cfg_steps samples the
// accelerator runs the two FC layers and raises cls_rdy for one cycle with
// cls = 1 when the second output neuron (abnormal step) is the larger.
// With x_rdy held high a window takes exactly 9624 cycles from the first
// accepted sample to cls_rdy (cfg_steps = 96); at 10 MHz that is 0.96 ms.
// cfg_steps (1..128) is start-up configuration: set it before wr_rd goes
// low and hold it while windows run.
// Defaults are the paper's configuration #5: parameters FxP(9,7),
// operations FxP(13,9); configuration #7 is PB = 8, PF = 6.
module lstm_accel_top
  import lstm_pkg::*;
#(
  parameter int unsigned PB      = 9,
  parameter int unsigned PF      = 7,
  parameter int unsigned OB      = 13,
  parameter int unsigned OF      = 9
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           mem_en,
  input  logic [ADDR_W-1:0]              mem_addr,
  input  logic [N_SLOTS*PB-1:0]          mem_wdata,
  input  logic                           wr_rd,
  input  logic signed [N_IN-1:0][XW-1:0] x_t,
  input  logic                           x_rdy,
  input  logic [7:0]                     cfg_steps,
  output logic                           cls,
  output logic                           cls_rdy
);
  logic                  sram_en, sram_we;
  logic [ADDR_W-1:0]     sram_addr;
  logic [N_SLOTS*PB-1:0] sram_rdata;
  ctl_t                  ctl;

  param_sram #(.PB(PB)) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(mem_wdata), .rdata(sram_rdata));

  control_logic u_ctrl (
    .clk, .rst, .wr_rd, .x_rdy, .cfg_steps, .mem_en, .mem_addr, .sram_en, .sram_we, .sram_addr, .ctl);

  lstm_nn_block #(.PB(PB), .PF(PF), .OB(OB), .OF(OF)) u_nn (
    .clk, .rst, .ctl, .word(sram_rdata), .x_t, .cls, .cls_rdy);
endmodule
