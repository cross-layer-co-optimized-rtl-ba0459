// cell_update: the state update of one LSTM cell.
//
//   c_t = f*c_{t-1} + i*g        h_t = o*tanh(c_t)
//
// The two products of c_t are rounded and clamped to the operation format
// FxP(OB,OF) and added at full width (c_sum, OB+1 bits). c_sum goes out to
// the shared activation unit, which returns tanh(c_sum) on tanh_c in the
// same cycle; the product o*tanh(c_t) is h_t. c_t is clamped to FxP(OB,OF)
// for storage. The structure is the right half of the paper's cell
// diagram; clamping the stored c_t is this design's choice. Purely
// combinational; the accelerator evaluates it in the store cycle that
// follows the four gate cycles of a cell.
module cell_update #(
  parameter int unsigned OB = 13,
  parameter int unsigned OF = 9
) (
  input  logic signed [OB-1:0] gi,
  input  logic signed [OB-1:0] gf,
  input  logic signed [OB-1:0] gg,
  input  logic signed [OB-1:0] go,
  input  logic signed [OB-1:0] c_prev,
  input  logic signed [OB-1:0] tanh_c,
  output logic signed [OB:0]   c_sum,
  output logic signed [OB-1:0] c_new,
  output logic signed [OB-1:0] h_new
);
  logic signed [OB-1:0] fc, ig;

  fxp_mul #(.AW(OB), .AF(OF), .BW(OB), .BF(OF), .OW(OB), .OF(OF)) u_fc (.a(gf), .b(c_prev), .p(fc));
  fxp_mul #(.AW(OB), .AF(OF), .BW(OB), .BF(OF), .OW(OB), .OF(OF)) u_ig (.a(gi), .b(gg),     .p(ig));
  fxp_mul #(.AW(OB), .AF(OF), .BW(OB), .BF(OF), .OW(OB), .OF(OF)) u_h  (.a(go), .b(tanh_c), .p(h_new));

  assign c_sum = (OB+1)'(fc) + (OB+1)'(ig);

  fxp_round_sat #(.IW(OB + 1), .SH(0), .OW(OB)) u_c (.v(c_sum), .q(c_new));
endmodule
