// tb_dot_product: random parameter words, operand vectors and samples in
// both modes, compared with the reference dot product; one hand-worked
// case checks the slot layout (vector weights, input weights, bias).
module tb_dot_product;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int PB = 9, PF = 7, OB = 13, OF = 9;

  logic [25*PB-1:0]                word;
  logic signed [19:0][OB-1:0]      vec;
  logic signed [3:0][9:0]          x;
  logic                            lstm_mode;
  logic signed [OB+5:0]            sum;

  dot_product #(.PB(PB), .PF(PF), .OB(OB), .OF(OF)) dut (.word, .vec, .x, .lstm_mode, .sum);

  sl w[25], v[20], xs[4];
  cfg_t k = '{pb: PB, pf: PF, ob: OB, of_: OF, fc_from_h: 0};

  task automatic drive();
    for (int j = 0; j < 25; j++) word[j*PB +: PB] = w[j][PB-1:0];
    for (int j = 0; j < 20; j++) vec[j] = v[j][OB-1:0];
    for (int j = 0; j < 4; j++)  x[j] = xs[j][9:0];
  endtask

  initial begin
    // hand-worked: w0 = 1.0, vec0 = 0.5; u1 = -1.0, x1 = 0.25; bias 0.5
    w = '{default: 0}; v = '{default: 0}; xs = '{default: 0};
    w[0] = 128; v[0] = 256; w[21] = -128; xs[1] = 64; w[24] = 64; w[20] = 32;
    drive(); lstm_mode = 1; #1;
    checks++;
    if (sum != 19'sd384) begin failures++; $display("FAIL lstm hand case %0d", sum); end   // 0.5-0.25+0.5 = 0.75
    lstm_mode = 0; #1;
    checks++;
    if (sum != 19'sd384) begin failures++; $display("FAIL fc hand case %0d", sum); end     // 0.5 + bias(slot 20)=0.25
    for (int it = 0; it < 3000; it++) begin
      for (int j = 0; j < 25; j++) w[j] = sl'($signed($urandom_range(511, 0))) - 256;
      for (int j = 0; j < 20; j++) v[j] = sl'($signed($urandom_range(8191, 0))) - 4096;
      for (int j = 0; j < 4; j++)  xs[j] = sl'($signed($urandom_range(1023, 0))) - 512;
      lstm_mode = it[0];
      drive(); #1;
      checks++;
      if (sum !== 19'(dot(w, v, xs, lstm_mode, k))) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d sum=%0d exp=%0d", it, sum, dot(w, v, xs, lstm_mode, k));
      end
    end
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
