// fxp_round_sat: drops SH fractional bits from a signed fixed-point value
// and clamps the result to OW bits.
//
// Rounding is half away from zero on the magnitude, which is the rounding
// the paper's quantizer describes with sign(x)*(|x| + eps); the clamp to the
// largest and smallest OW-bit values is the paper's saturation rule. In
// two's complement, half-away-from-zero is (v + half - (v<0)) >>> SH.
// Purely combinational.
module fxp_round_sat #(
  parameter int unsigned IW = 26,   // input width
  parameter int unsigned SH = 7,    // fractional bits dropped (0: none)
  parameter int unsigned OW = 13    // output width
) (
  input  logic signed [IW-1:0] v,
  output logic signed [OW-1:0] q
);
  localparam int unsigned TW = IW + 1;
  localparam logic signed [TW-1:0] MAXV = TW'((64'sd1 <<< (OW - 1)) - 1);
  localparam logic signed [TW-1:0] MINV = TW'(-(64'sd1 <<< (OW - 1)));

  logic signed [TW-1:0] ext, rnd, bump;

  always_comb begin
    ext  = TW'(v);
    bump = '0;
    if (SH == 0) begin
      rnd = ext;
    end else begin
      // half an output LSB, one less for negative values
      bump = v[IW-1] ? TW'((64'sd1 <<< (SH - 1)) - 1) : TW'(64'sd1 <<< (SH - 1));
      rnd  = (ext + bump) >>> SH;
    end
    if (rnd > MAXV)      q = MAXV[OW-1:0];
    else if (rnd < MINV) q = MINV[OW-1:0];
    else                 q = rnd[OW-1:0];
  end

  initial begin
    assert (OW <= IW + 1) else $error("fxp_round_sat: OW must not exceed IW+1");
  end
endmodule
