// lstm_nn_block: datapath of the accelerator (the "LSTM NN block").
//
// One dot-product unit, one activation unit and one cell-update unit are
// shared by all 20 cells, all gates and both FC layers; the control logic
// decides each cycle what they compute (ctl.step):
//   STEP_GATE   pre-activation of gate ctl.gate of cell ctl.idx from the
//               SRAM word, h_{t-1} (operand vector vec) and X_t; sigmoid for
//               i, f, o and tanh for g, into a gate register
//   STEP_CELL   c_t = f*c + i*g, h_t = o*tanh(c_t) for cell ctl.idx; c_t
//               is stored in place, h_t in the second array nxt. In the
//               last cell of a sample nxt (h_t) is copied into vec, so every
//               cell of a sample sees h_{t-1}. After the last sample vec is
//               loaded with the cell states C^n instead (with h_t if
//               FC_FROM_H = 1), the input of FC1.
//   STEP_FC1    neuron ctl.idx of FC1: dot product, ReLU, into nxt
//   STEP_FC1_S  FC1 outputs nxt copied into vec, the input of FC2
//   STEP_FC2    neuron ctl.idx of FC2 into nxt
//   STEP_FC2_S  MAX of the two FC2 outputs gives cls (tie: class 0),
//               cls_rdy pulses for one cycle, c and vec are cleared for
//               the next window
// In write mode (ctl.clear) c and vec are cleared, so a window cut short
// by a parameter load leaves nothing behind.
// X_t is used from the port in the first gate cycle of a sample and kept
// in x_reg for the other 79. All stored values are in the operation format
// FxP(OB,OF), parameters in FxP(PB,PF), X_t in FxP(10,8).
//
// The order of work, the shared units and feeding C^n to FC1 follow the
// paper. The double-buffered h, the use of the store cycles of FC1 and
// FC2, clamping of stored values and zero initial state per window are
// this design's choices. Single clock, synchronous active-high reset.
module lstm_nn_block
  import lstm_pkg::*;
#(
  parameter int unsigned PB        = 9,
  parameter int unsigned PF        = 7,
  parameter int unsigned OB        = 13,
  parameter int unsigned OF        = 9,
  parameter bit          FC_FROM_H = 1'b0
) (
  input  logic                           clk,
  input  logic                           rst,
  input  ctl_t                           ctl,
  input  logic [N_SLOTS*PB-1:0]          word,
  input  logic signed [N_IN-1:0][XW-1:0] x_t,
  output logic                           cls,
  output logic                           cls_rdy
);
  localparam int unsigned SW = OB + 6;

  logic signed [N_VEC-1:0][OB-1:0]   vec;    // operand vector: h_{t-1}, C^n or FC1 outputs
  logic signed [N_VEC-1:0][OB-1:0]   nxt;    // h_t of this sample, then FC outputs
  logic signed [N_CELLS-1:0][OB-1:0] c;      // cell states
  logic signed [N_GATES-1:0][OB-1:0] gates;  // i, f, g, o of the current cell
  logic signed [N_IN-1:0][XW-1:0]    x_reg;

  logic signed [N_IN-1:0][XW-1:0]    x_use;
  logic signed [SW-1:0]              sum, act_in;
  logic signed [OB-1:0]              act_y, fc_q, relu_q;
  logic signed [OB:0]                c_sum;
  logic signed [OB-1:0]              c_new, h_new;
  act_fn_e                           act_fn;
  logic                              is_gate, is_cell;

  assign is_gate = (ctl.step == STEP_GATE);
  assign is_cell = (ctl.step == STEP_CELL);
  assign x_use   = ctl.first_gate ? x_t : x_reg;

  dot_product #(.PB(PB), .PF(PF), .OB(OB), .OF(OF), .SW(SW)) u_dot (
    .word, .vec, .x(x_use), .lstm_mode(is_gate), .sum);

  // the activation unit serves the gates and the cell's tanh(c_t)
  assign act_in = is_cell ? SW'(c_sum) : sum;
  assign act_fn = (is_cell || ctl.gate == GATE_G) ? ACT_TANH : ACT_SIGMOID;

  poly_act #(.OB(OB), .OF(OF), .IW(SW)) u_act (.x(act_in), .fn(act_fn), .y(act_y));

  cell_update #(.OB(OB), .OF(OF)) u_cell (
    .gi($signed(gates[GATE_I])), .gf($signed(gates[GATE_F])), .gg($signed(gates[GATE_G])), .go($signed(gates[GATE_O])),
    .c_prev($signed(c[ctl.idx])), .tanh_c(act_y), .c_sum, .c_new, .h_new);

  // FC neuron output, clamped to the operation format; ReLU for FC1
  fxp_round_sat #(.IW(SW), .SH(0), .OW(OB)) u_fcq (.v(sum), .q(fc_q));
  assign relu_q = fc_q[OB-1] ? '0 : fc_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      vec     <= '0;
      nxt     <= '0;
      c       <= '0;
      gates   <= '0;
      x_reg   <= '0;
      cls     <= 1'b0;
      cls_rdy <= 1'b0;
    end else begin
      cls_rdy <= 1'b0;
      if (ctl.clear) begin
        vec <= '0;
        c   <= '0;
      end else if (ctl.en) begin
        unique case (ctl.step)
          STEP_GATE: begin
            gates[ctl.gate] <= act_y;
            if (ctl.first_gate) x_reg <= x_t;
          end
          STEP_CELL: begin
            c[ctl.idx]   <= c_new;
            nxt[ctl.idx] <= h_new;
            if (ctl.idx == 5'(N_CELLS - 1)) begin
              for (int k = 0; k < N_VEC; k++) begin
                if (ctl.last_sample && !FC_FROM_H)
                  vec[k] <= (k == N_CELLS - 1) ? c_new : c[k];
                else
                  vec[k] <= (k == N_CELLS - 1) ? h_new : nxt[k];
              end
            end
          end
          STEP_FC1:   nxt[ctl.idx] <= relu_q;
          STEP_FC1_S: vec <= nxt;
          STEP_FC2:   nxt[ctl.idx] <= fc_q;
          STEP_FC2_S: begin
            cls     <= ($signed(nxt[1]) > $signed(nxt[0]));
            cls_rdy <= 1'b1;
            vec     <= '0;
            c       <= '0;
          end
          default: ;
        endcase
      end
    end
  end

  a_idx: assert property (@(posedge clk) disable iff (rst) ctl.en |-> (ctl.idx < 5'(N_VEC)) || ctl.step inside {STEP_FC1_S, STEP_FC2_S});
endmodule
