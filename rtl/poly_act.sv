// poly_act: shared sigmoid / tanh unit.
//
// Both functions are the paper's piecewise second-order polynomials: four
// quadratic segments between two constant tails (sigmoid: 0 below -6, 1
// above 6, segment edges -6,-3,0,3,6; tanh: -1 below -3, 1 above 3, edges
// -3,-1,0,1,3). The segment is chosen by comparing the unrounded input
// against the edges, the coefficients (FxP(18,13)) are looked up, and the
// quadratic is evaluated in Horner form, y = (a*x + b)*x + c, with two
// multipliers. Horner form is this design's choice: the paper writes
// a*x^2 + b*x + c, but x^2 reaches 36 on the outer sigmoid segments and
// would clamp in a 13-bit operation format, while a*x+b stays below 1.7
// and (a*x+b)*x below 8. As everywhere in the accelerator, each product is
// rounded and clamped to the operation format FxP(OB,OF) and the additions
// of b and c are done at full width with 13 fractional bits; the result is
// rounded to FxP(OB,OF).
//
// Interface: x is the full-width pre-activation with OF fractional bits,
// fn selects the function, y is the activation. Purely combinational; in
// the accelerator it sits between the dot product and the gate registers.
module poly_act
  import lstm_pkg::*;
#(
  parameter int unsigned OB = 13,
  parameter int unsigned OF = 9,
  parameter int unsigned IW = OB + 6
) (
  input  logic signed [IW-1:0] x,
  input  act_fn_e              fn,
  output logic signed [OB-1:0] y
);
  localparam int unsigned AL  = CF - OF;                 // alignment to 13 fractional bits
  localparam int unsigned S1W = ((OB + AL > CW) ? OB + AL : CW) + 1;
  localparam int unsigned YW  = S1W + 1;

  localparam logic signed [IW-1:0] ONE   = IW'(64'sd1 <<< OF);
  localparam logic signed [IW-1:0] THREE = IW'(64'sd3 <<< OF);
  localparam logic signed [IW-1:0] SIX   = IW'(64'sd6 <<< OF);

  logic signed [OB-1:0]  xq;          // input clamped to the operation format
  logic [1:0]            seg;
  logic                  lo_tail, hi_tail;
  poly_t                 k;
  logic signed [OB-1:0]  t1, t2;
  logic signed [S1W-1:0] s1;
  logic signed [YW-1:0]  yf;
  logic signed [OB-1:0]  yq;

  fxp_round_sat #(.IW(IW), .SH(0), .OW(OB)) u_xq (.v(x), .q(xq));

  // segment and tails
  always_comb begin
    if (fn == ACT_SIGMOID) begin
      lo_tail = (x <= -SIX);
      hi_tail = (x >  SIX);
      if (x <= -THREE)      seg = 2'd0;
      else if (x <= 0)     seg = 2'd1;
      else if (x <= THREE)  seg = 2'd2;
      else                  seg = 2'd3;
      k = sig_coef(seg);
    end else begin
      lo_tail = (x <= -THREE);
      hi_tail = (x >  THREE);
      if (x <= -ONE)        seg = 2'd0;
      else if (x <= 0)     seg = 2'd1;
      else if (x <= ONE)    seg = 2'd2;
      else                  seg = 2'd3;
      k = tanh_coef(seg);
    end
  end

  // Horner evaluation
  fxp_mul #(.AW(CW), .AF(CF), .BW(OB), .BF(OF), .OW(OB), .OF(OF)) u_m1 (.a(k.a), .b(xq), .p(t1));
  assign s1 = (S1W'(t1) <<< AL) + S1W'(k.b);
  fxp_mul #(.AW(S1W), .AF(CF), .BW(OB), .BF(OF), .OW(OB), .OF(OF)) u_m2 (.a(s1), .b(xq), .p(t2));
  assign yf = (YW'(t2) <<< AL) + YW'(k.c);
  fxp_round_sat #(.IW(YW), .SH(AL), .OW(OB)) u_yq (.v(yf), .q(yq));

  always_comb begin
    if (lo_tail)      y = (fn == ACT_SIGMOID) ? '0 : -OB'(64'sd1 <<< OF);
    else if (hi_tail) y = OB'(64'sd1 <<< OF);
    else              y = yq;
  end

  initial begin
    assert (OF <= CF) else $error("poly_act: OF must not exceed the coefficient fraction");
    assert (OB - OF >= 3) else $error("poly_act: operation format must represent +-3");
  end
endmodule
