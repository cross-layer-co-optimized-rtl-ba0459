// tb_poly_act: sweeps the activation unit over every input from -10 to
// +10 (FxP with 9 fractional bits, step 2^-9) for sigmoid and tanh and
// compares with the reference model bit for bit; also checks that the
// result stays within 0.02 of the true function and that the tails and
// segment edges give the expected values.
module tb_poly_act;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [18:0] x;
  act_fn_e            fn;
  logic signed [12:0] y;

  poly_act #(.OB(13), .OF(9), .IW(19)) dut (.x(x), .fn(fn), .y(y));

  real maxerr[2] = '{0.0, 0.0};

  initial begin
    for (int f = 0; f < 2; f++) begin
      fn = act_fn_e'(f);
      for (int v = -5120; v <= 5120; v++) begin
        sl e;
        real xr, tr, err;
        x = 19'(v);
        #1;
        e = act(sl'(v), f == 1, 13, 9);
        checks++;
        if (y !== 13'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL fn=%0d x=%0d y=%0d exp=%0d", f, v, y, e);
        end
        xr = v / 512.0;
        tr = (f == 0) ? 1.0 / (1.0 + $exp(-xr)) : (($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr)));
        err = y / 512.0 - tr;
        if (err < 0) err = -err;
        if (err > maxerr[f]) maxerr[f] = err;
      end
    end
    // far outside the polynomial range
    fn = ACT_SIGMOID; x = -19'sd200000; #1; checks++; if (y != 0) failures++;
    x = 19'sd200000; #1; checks++; if (y != 13'sd512) failures++;
    fn = ACT_TANH; x = -19'sd200000; #1; checks++; if (y != -13'sd512) failures++;
    // edges: sigmoid(-6) = 0 (tail includes -6), tanh(3) from the polynomial
    fn = ACT_SIGMOID; x = -19'sd3072; #1; checks++; if (y != 0) failures++;
    fn = ACT_SIGMOID; x = 19'sd0; #1; checks++; if (y < 13'sd254 || y > 13'sd258) failures++;
    $display("max |error| sigmoid %f tanh %f", maxerr[0], maxerr[1]);
    checks += 2;
    if (maxerr[0] > 0.02) failures++;
    if (maxerr[1] > 0.02) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
