// tb_cell_update: random gate values, cell states and tanh inputs against
// the reference c_t = f*c + i*g (each product rounded), its clamp, and
// h_t = o*tanh(c_t); plus a hand-worked case.
module tb_cell_update;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [12:0] gi, gf, gg, go, c_prev, tanh_c, c_new, h_new;
  logic signed [13:0] c_sum;

  cell_update #(.OB(13), .OF(9)) dut (.gi, .gf, .gg, .go, .c_prev, .tanh_c, .c_sum, .c_new, .h_new);

  int clamps = 0;

  initial begin
    // f=0.5 c=2.0 i=1.0 g=-0.5 -> c=0.5 ; o=0.5 tanh=0.25 -> h=0.125
    gf = 256; c_prev = 1024; gi = 512; gg = -256; go = 256; tanh_c = 128; #1;
    checks += 3;
    if (c_sum != 14'sd256) failures++;
    if (c_new != 13'sd256) failures++;
    if (h_new != 13'sd64) failures++;
    for (int it = 0; it < 5000; it++) begin
      sl ei, ef, eg, eo, ec, et, es;
      ei = sl'($urandom_range(512, 0)); ef = sl'($urandom_range(512, 0)); eo = sl'($urandom_range(512, 0));
      eg = sl'($signed($urandom_range(1024, 0))) - 512;
      et = sl'($signed($urandom_range(1024, 0))) - 512;
      ec = sl'($signed($urandom_range(8191, 0))) - 4096;
      if (it % 7 == 0) begin ef = 512; ec = (it % 2 == 1) ? 4095 : -4096; ei = 512; eg = (it % 2 == 1) ? 512 : -512; end
      gi = 13'(ei); gf = 13'(ef); gg = 13'(eg); go = 13'(eo); c_prev = 13'(ec); tanh_c = 13'(et);
      #1;
      es = mul(ef, 9, ec, 9, 13, 9) + mul(ei, 9, eg, 9, 13, 9);
      checks += 3;
      if (c_sum !== 14'(es)) failures++;
      if (c_new !== 13'(q(es, 0, 13))) failures++;
      if (h_new !== 13'(mul(eo, 9, et, 9, 13, 9))) failures++;
      if (q(es, 0, 13) != es) clamps++;
    end
    checks++;
    if (clamps == 0) begin failures++; $display("FAIL no clamped c_t"); end
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
