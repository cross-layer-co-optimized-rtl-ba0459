// fxp_mul: signed fixed-point multiplier with the product rounded and
// clamped to a fixed format.
//
// The accelerator fixes the size of every multiplication to the operation
// format FxP(OW,OF), while additions keep their full width. This unit takes
// a = FxP(AW,AF) and b = FxP(BW,BF), forms the exact AW+BW-bit product with
// AF+BF fractional bits, drops AF+BF-OF bits with rounding half away from
// zero and clamps to OW bits. Requires AF+BF >= OF. Purely combinational.
module fxp_mul #(
  parameter int unsigned AW = 9,
  parameter int unsigned AF = 7,
  parameter int unsigned BW = 13,
  parameter int unsigned BF = 9,
  parameter int unsigned OW = 13,
  parameter int unsigned OF = 9
) (
  input  logic signed [AW-1:0] a,
  input  logic signed [BW-1:0] b,
  output logic signed [OW-1:0] p
);
  logic signed [AW+BW-1:0] full;
  assign full = a * b;

  fxp_round_sat #(.IW(AW + BW), .SH(AF + BF - OF), .OW(OW)) u_q (.v(full), .q(p));

  initial begin
    assert (AF + BF >= OF) else $error("fxp_mul: product has fewer fractional bits than the output");
  end
endmodule
