// tb_fxp_mul: checks the rounding multiplier against the reference model
// for a parameter x state product (FxP(9,7) x FxP(13,9) -> FxP(13,9)) and
// an input product (FxP(9,7) x FxP(10,8) -> FxP(13,9)), on random operands
// and on the corner values that round at exactly one half and that clamp.
module tb_fxp_mul;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [8:0]  a;
  logic signed [12:0] b;
  logic signed [9:0]  bx;
  logic signed [12:0] p, px;

  fxp_mul #(.AW(9), .AF(7), .BW(13), .BF(9), .OW(13), .OF(9)) dut  (.a(a), .b(b),  .p(p));
  fxp_mul #(.AW(9), .AF(7), .BW(10), .BF(8), .OW(13), .OF(9)) dutx (.a(a), .b(bx), .p(px));

  int sat_seen = 0, tie_seen = 0;

  task automatic check(sl av, sl bv, sl bxv);
    sl e, ex;
    a = av[8:0]; b = bv[12:0]; bx = bxv[9:0];
    #1;
    e  = mul(av, 7, bv, 9, 13, 9);
    ex = mul(av, 7, bxv, 8, 13, 9);
    checks += 2;
    if (p !== 13'(e))  begin failures++; $display("FAIL a=%0d b=%0d p=%0d exp=%0d", av, bv, p, e); end
    if (px !== 13'(ex)) begin failures++; $display("FAIL a=%0d x=%0d p=%0d exp=%0d", av, bxv, px, ex); end
    if (e == 4095 || e == -4096) sat_seen++;
    if (((av * bv) & 127) == 64) tie_seen++;
  endtask

  initial begin
    // hand-worked values: 1.0 * 1.0 = 1.0 ; -0.5 * 0.5 = -0.25 ; -1/128 * 1/512 -> 0
    a = 9'sd128; b = 13'sd512; bx = 10'sd256; #1;
    checks += 2;
    if (p != 13'sd512) failures++;
    if (px != 13'sd512) failures++;
    a = -9'sd64; b = 13'sd256; #1; checks++;
    if (p != -13'sd128) failures++;
    // -(3*64)/2^7 = -1.5 LSB of the output: rounds away from zero to -2
    a = -9'sd3; b = 13'sd64; #1; checks++;
    if (p != -13'sd2) begin failures++; $display("FAIL tie rounding %0d", p); end
    a = 9'sd3; #1; checks++;
    if (p != 13'sd2) failures++;
    // clamps: -2.0 * -8.0 = 16 > 7.998
    a = -9'sd256; b = -13'sd4096; #1; checks++;
    if (p != 13'sd4095) failures++;
    check(-256, -4096, -512); check(255, 4095, 511); check(-256, 4095, 511);
    for (int i = 0; i < 4000; i++)
      check(sl'($signed($urandom_range(511, 0))) - 256, sl'($signed($urandom_range(8191, 0))) - 4096,
            sl'($signed($urandom_range(1023, 0))) - 512);
    checks++;
    if (sat_seen == 0 || tie_seen == 0) begin failures++; $display("FAIL corner cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
