// tb_sram_bank: fills the 102-word bank with random data, reads it back
// in random order, and checks the one-cycle read latency, that a write
// leaves rdata unchanged and that rdata holds while en is low.
module tb_sram_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int W = 113;
  logic         en = 0, we = 0;
  logic [6:0]   addr = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [102];

  sram_bank #(.DEPTH(102), .WIDTH(W), .ADDR_W(7)) dut (.clk, .en, .we, .addr, .wdata, .rdata);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] r;
    for (int i = 0; i < W; i += 32) r[i +: 32] = $urandom();
    return r;
  endfunction

  initial begin
    @(negedge clk);
    for (int a = 0; a < 102; a++) begin
      en = 1; we = 1; addr = 7'(a); model[a] = rnd(); wdata = model[a];
      @(negedge clk);
    end
    for (int i = 0; i < 400; i++) begin
      int a;
      logic [W-1:0] prev;
      a = $urandom_range(101, 0);
      en = 1; we = 0; addr = 7'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      // write elsewhere: rdata must not change
      prev = rdata;
      we = 1; addr = 7'((a + 1) % 102); model[(a + 1) % 102] = rnd(); wdata = model[(a + 1) % 102];
      @(negedge clk);
      checks++;
      if (rdata !== prev) begin failures++; $display("FAIL rdata changed on write"); end
      // en low: hold
      en = 0; we = 0; addr = 7'((a + 5) % 102);
      @(negedge clk);
      checks++;
      if (rdata !== prev) begin failures++; $display("FAIL rdata changed with en low"); end
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
