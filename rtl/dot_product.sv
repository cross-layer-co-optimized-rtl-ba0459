// dot_product: the accelerator's shared dot-product unit.
//
// One parameter word holds 25 values of FxP(PB,PF). In LSTM mode the unit
// forms, in one cycle, the gate pre-activation
//   sum = sum_j w[j]*vec[j] (j = 0..19) + sum_k u[k]*x[k] (k = 0..3) + bias
// with w = slots 0..19, u = slots 20..23 and the bias in slot 24; vec is
// h_{t-1} of all 20 cells and x the sample X_t in FxP(10,8). In FC mode the
// same 20 multipliers serve a neuron, sum = sum_j w[j]*vec[j] + bias with
// the bias in slot 20 and the input terms removed. Every product is rounded
// and clamped to the operation format FxP(OB,OF); the adder tree and the
// bias alignment keep full width (OB+6 bits, OF fractional bits), as the
// paper leaves additions unrestricted. The word layout is this design's
// choice; the paper gives only the 20+4+1 and 20+1 counts.
//
// Purely combinational: word comes from the SRAM read port, the sum goes
// to the activation unit or to the FC store logic in the same cycle.
module dot_product
  import lstm_pkg::*;
#(
  parameter int unsigned PB = 9,
  parameter int unsigned PF = 7,
  parameter int unsigned OB = 13,
  parameter int unsigned OF = 9,
  parameter int unsigned SW = OB + 6
) (
  input  logic [N_SLOTS*PB-1:0]            word,
  input  logic signed [N_VEC-1:0][OB-1:0]  vec,
  input  logic signed [N_IN-1:0][XW-1:0]   x,
  input  logic                             lstm_mode,
  output logic signed [SW-1:0]             sum
);
  // unpacked views so that every element is a signed number
  logic signed [PB-1:0] w  [N_SLOTS];
  logic signed [OB-1:0] pv [N_VEC];
  logic signed [OB-1:0] px [N_IN];
  logic signed [PB-1:0] bias;

  for (genvar j = 0; j < N_SLOTS; j++) begin : g_w
    assign w[j] = word[j*PB +: PB];
  end

  for (genvar j = 0; j < N_VEC; j++) begin : g_vec
    fxp_mul #(.AW(PB), .AF(PF), .BW(OB), .BF(OF), .OW(OB), .OF(OF)) u_m (.a(w[j]), .b($signed(vec[j])), .p(pv[j]));
  end
  for (genvar k = 0; k < N_IN; k++) begin : g_x
    fxp_mul #(.AW(PB), .AF(PF), .BW(XW), .BF(XF), .OW(OB), .OF(OF)) u_m (.a(w[SLOT_XW+k]), .b($signed(x[k])), .p(px[k]));
  end

  assign bias = lstm_mode ? w[SLOT_GB] : w[SLOT_FB];

  always_comb begin
    sum = SW'(bias) <<< (OF - PF);
    for (int j = 0; j < N_VEC; j++) sum += SW'(pv[j]);
    if (lstm_mode)
      for (int k = 0; k < N_IN; k++) sum += SW'(px[k]);
  end

  initial begin
    assert (OF >= PF) else $error("dot_product: OF must be at least PF to align the bias");
  end
endmodule
