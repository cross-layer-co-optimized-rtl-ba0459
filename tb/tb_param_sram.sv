// tb_param_sram: writes all 102 parameter words (25 x 9 bits) with random
// contents and reads them back one cycle later in random order, which
// checks that the two banks together return every bit of the word.
module tb_param_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WW = 225;
  logic          en = 0, we = 0;
  logic [6:0]    addr = 0;
  logic [WW-1:0] wdata = '0, rdata;
  logic [WW-1:0] model [102];

  param_sram #(.PB(9)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    @(negedge clk);
    for (int a = 0; a < 102; a++) begin
      for (int i = 0; i < WW; i += 32) model[a][i +: 32] = $urandom();
      en = 1; we = 1; addr = 7'(a); wdata = model[a];
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 500; i++) begin
      int a;
      a = (i < 102) ? i : $urandom_range(101, 0);
      addr = 7'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
