// control_logic: counter-based sequencer of the accelerator.
//
// The schedule is fixed, so a counter replaces any instruction stream.
// One window of S samples takes S*20*(4+1) + (20+1) + (2+1) enabled
// cycles (9624 for the 96 samples of a gait window):
//   LSTM  per sample, per cell: 4 gate cycles (i, f, g, o), 1 store cycle
//   FC1   20 neuron cycles, 1 store cycle
//   FC2   2 neuron cycles, 1 store cycle (classification out)
// after which the counter returns to the first sample and waits for the
// next window.
//
// wr_rd selects who owns the SRAM. With wr_rd = 1 (initialisation) the
// external MEM port writes parameter words and the counter is held at the
// first step; ctl.clear tells the datapath to drop the state of a window
// that was cut short. With wr_rd = 0 the counter reads one parameter word per gate
// or neuron step. The SRAM answers one cycle after a read, so the word of
// the next step is requested in the current cycle (for a new cell, in the
// store cycle of the previous one); this keeps the schedule free of
// bubbles. The first step of each sample waits for x_rdy; X_t is taken
// from the port in that cycle. The formula and the counter are the
// paper's; the prefetch, the x_rdy wait and the wr_rd polarity are this
// design's choices.
//
// The number of samples per window, S, comes from the cfg_steps input
// (1..128) rather than from a synthesis parameter: it is start-up
// configuration, set before wr_rd goes low and held while the counter
// runs. The paper loads such settings from an external memory at
// start-up; that loader is not part of this design, so cfg_steps is a
// plain input for it (or the host) to drive.
//
// ctl describes the step executed this cycle (ctl.en = 1) for the
// datapath; it is combinational from the counter state and x_rdy.
// ctl.clear is wr_rd itself, passed on so the datapath can drop its state.
// x_rdy is only looked at while the counter waits for a sample: a sensor
// that pulses x_rdy must leave at least 100 cycles between samples (124
// after the last one of a window).
module control_logic
  import lstm_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_rd,      // 1: write parameters, 0: execute
  input  logic              x_rdy,
  input  logic [7:0]        cfg_steps,  // samples per window, 1..128
  input  logic              mem_en,
  input  logic [ADDR_W-1:0] mem_addr,
  output logic              sram_en,
  output logic              sram_we,
  output logic [ADDR_W-1:0] sram_addr,
  output ctl_t              ctl
);
  typedef enum logic [1:0] {PH_LSTM = 2'd0, PH_FC1 = 2'd1, PH_FC2 = 2'd2} phase_e;

  typedef struct packed {
    phase_e     ph;
    logic [6:0] t;    // sample
    logic [4:0] n;    // cell or neuron
    logic [2:0] s;    // 0..3 gate, 4 store (LSTM only)
  } cnt_t;

  localparam cnt_t START = '{ph: PH_LSTM, t: '0, n: '0, s: '0};

  cnt_t cur, nxt, tgt;
  logic primed, wait_x, active;
  logic [6:0] last_t;

  assign last_t = 7'(cfg_steps - 8'd1);

  function automatic cnt_t advance(cnt_t c);
    cnt_t r = c;
    unique case (c.ph)
      PH_LSTM: begin
        if (c.s != 3'd4) r.s = c.s + 3'd1;
        else begin
          r.s = '0;
          if (c.n != 5'(N_CELLS - 1)) r.n = c.n + 5'd1;
          else begin
            r.n = '0;
            if (c.t != last_t) r.t = c.t + 7'd1;
            else begin
              r.t  = '0;
              r.ph = PH_FC1;
            end
          end
        end
      end
      PH_FC1: begin
        if (c.n != 5'(N_FC1)) r.n = c.n + 5'd1;
        else begin
          r.n  = '0;
          r.ph = PH_FC2;
        end
      end
      default: begin
        if (c.n != 5'(N_FC2)) r.n = c.n + 5'd1;
        else r = START;
      end
    endcase
    return r;
  endfunction

  // the step reads a parameter word
  function automatic logic reads(cnt_t c);
    unique case (c.ph)
      PH_LSTM: return c.s != 3'd4;
      PH_FC1:  return c.n != 5'(N_FC1);
      default: return c.n != 5'(N_FC2);
    endcase
  endfunction

  function automatic logic [ADDR_W-1:0] addr_of(cnt_t c);
    unique case (c.ph)
      PH_LSTM: return ADDR_W'(c.n) * ADDR_W'(N_GATES) + ADDR_W'(c.s);
      PH_FC1:  return ADDR_W'(ADDR_FC1) + ADDR_W'(c.n);
      default: return ADDR_W'(ADDR_FC2) + ADDR_W'(c.n);
    endcase
  endfunction

  assign wait_x = (cur.ph == PH_LSTM) && (cur.n == '0) && (cur.s == '0);
  assign active = !wr_rd && primed && (!wait_x || x_rdy);
  assign nxt    = advance(cur);
  assign tgt    = active ? nxt : cur;

  always_ff @(posedge clk) begin
    if (rst) begin
      cur    <= START;
      primed <= 1'b0;
    end else begin
      primed <= !wr_rd;
      if (wr_rd)       cur <= START;
      else if (active) cur <= nxt;
    end
  end

  // SRAM port
  always_comb begin
    if (wr_rd) begin
      sram_en   = mem_en;
      sram_we   = 1'b1;
      sram_addr = mem_addr;
    end else begin
      sram_en   = reads(tgt);
      sram_we   = 1'b0;
      sram_addr = addr_of(tgt);
    end
  end

  // datapath step
  always_comb begin
    ctl.en          = active;
    ctl.gate        = gate_e'(cur.s[1:0]);
    ctl.idx         = cur.n;
    ctl.first_gate  = wait_x;
    ctl.last_sample = (cur.t == last_t);
    ctl.clear       = wr_rd;
    unique case (cur.ph)
      PH_LSTM: ctl.step = (cur.s == 3'd4) ? STEP_CELL : STEP_GATE;
      PH_FC1:  ctl.step = (cur.n == 5'(N_FC1)) ? STEP_FC1_S : STEP_FC1;
      default: ctl.step = (cur.n == 5'(N_FC2)) ? STEP_FC2_S : STEP_FC2;
    endcase
  end

  // the step count is valid and held while the counter runs
  a_steps: assert property (@(posedge clk) disable iff (rst) !wr_rd |-> (cfg_steps >= 8'd1 && cfg_steps <= 8'd128));
  a_held:  assert property (@(posedge clk) disable iff (rst) (!wr_rd && !$past(wr_rd)) |-> $stable(cfg_steps));

  // a read stays inside the memory map
  a_addr: assert property (@(posedge clk) disable iff (rst) (sram_en && !sram_we) |-> (sram_addr < ADDR_W'(MEM_DEPTH)));
endmodule
