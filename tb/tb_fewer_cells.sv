// tb_fewer_cells: a network with fewer than 20 LSTM cells on the 20-cell
// accelerator. Cells 12..19 are switched off by zeroing every weight that
// reads them: their slots in all gate words (recurrent weights) and in
// the FC1 words. The same 96 samples are then run twice: once with the
// unused cells' own gate words zero, once with random data in them. Both
// runs must give the reference result and the same two output neurons,
// which shows that nothing of an unused cell reaches the result.
module tb_fewer_cells;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int PB = 9, PF = 7, OB = 13, OF = 9, NS = 96, USED = 12;
  cfg_t k = '{pb: PB, pf: PF, ob: OB, of_: OF, fc_from_h: 0};

  logic                    rst = 1, mem_en = 0, wr_rd = 1, x_rdy = 0, cls, cls_rdy;
  logic [6:0]              mem_addr = 0;
  logic [25*PB-1:0]        mem_wdata = '0;
  logic signed [3:0][9:0]  x_t = '0;

  lstm_accel_top dut (.clk, .rst, .mem_en, .mem_addr, .mem_wdata, .wr_rd, .x_t, .x_rdy, .cfg_steps(8'(NS)), .cls, .cls_rdy);

  sl P[102][25];
  sl X[NS][4];
  logic [12:0] out0[2], out1[2];

  task automatic load();
    @(posedge clk);
    wr_rd <= 1;
    for (int a = 0; a < 102; a++) begin
      logic [25*PB-1:0] w;
      for (int j = 0; j < 25; j++) w[j*PB +: PB] = P[a][j][PB-1:0];
      mem_en <= 1; mem_addr <= 7'(a); mem_wdata <= w;
      @(posedge clk);
    end
    mem_en <= 0;
    @(posedge clk);
    wr_rd <= 0;
  endtask

  task automatic run(int r);
    state_t st;
    sl o0, o1;
    int e;
    for (int t = 0; t < NS; t++) begin
      repeat (100) @(posedge clk);
      for (int c = 0; c < 4; c++) x_t[c] <= X[t][c][9:0];
      x_rdy <= 1;
      @(posedge clk);
      x_rdy <= 0;
    end
    do @(posedge clk); while (!cls_rdy);
    foreach (st.c[i]) begin st.c[i] = 0; st.h[i] = 0; end
    for (int t = 0; t < NS; t++) step(P, X[t], st, k);
    e = classify(P, st, k, o0, o1);
    out0[r] = dut.u_nn.nxt[0];
    out1[r] = dut.u_nn.nxt[1];
    checks += 2;
    if (cls !== e[0]) begin failures++; $display("FAIL run %0d: cls %0d expected %0d", r, cls, e); end
    if (out0[r] !== 13'(o0) || out1[r] !== 13'(o1)) begin failures++; $display("FAIL run %0d: output neurons", r); end
    // the unused cells are not at rest: their state is not all zero
    if (r == 1) begin
      int busy = 0;
      for (int n = USED; n < 20; n++) if (st.c[n] != 0) busy++;
      checks++;
      if (busy == 0) begin failures++; $display("FAIL unused cells idle in run 1"); end
    end
    $display("run %0d: cls=%0d outputs %0d %0d", r, cls, o0, o1);
  endtask

  initial begin
    rand_params(P, PB, 128);
    for (int a = 0; a < 80; a++) for (int j = USED; j < 20; j++) P[a][j] = 0;      // recurrent weights from unused cells
    for (int a = 80; a < 100; a++) for (int j = USED; j < 20; j++) P[a][j] = 0;    // FC1 weights from unused cells
    for (int a = 4*USED; a < 80; a++) for (int j = 0; j < 25; j++) P[a][j] = 0;    // the unused cells' own words
    for (int t = 0; t < NS; t++)
      for (int c = 0; c < 4; c++) X[t][c] = sl'($signed($urandom_range(1023, 0))) - 512;
    repeat (3) @(posedge clk);
    rst <= 0;
    load();
    run(0);
    // now fill the unused cells' own gate words with random values
    for (int a = 4*USED; a < 80; a++)
      for (int j = 0; j < 25; j++)
        if (j < USED || j >= 20) P[a][j] = sl'($signed($urandom_range(256, 0))) - 128;
    load();
    run(1);
    checks++;
    if (out0[0] !== out0[1] || out1[0] !== out1[1]) begin failures++; $display("FAIL unused cells changed the result"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
