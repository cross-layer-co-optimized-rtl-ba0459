// tb_lstm_nn_block: drives the datapath directly with the step sequence
// of a 4-sample window (the parameter word of each step is presented in
// the same cycle, as the SRAM's prefetched read does), and compares with
// the reference model: all cell states and hidden states after every
// sample, the two FC2 outputs and cls after every window. Three windows
// with fresh random data; the second one also checks that the state was
// cleared between windows.
module tb_lstm_nn_block;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int PB = 9, PF = 7, OB = 13, OF = 9, NS = 4;
  cfg_t k = '{pb: PB, pf: PF, ob: OB, of_: OF, fc_from_h: 0};

  logic                    rst = 1;
  ctl_t                    ctl;
  logic [25*PB-1:0]        word;
  logic signed [3:0][9:0]  x_t;
  logic                    cls, cls_rdy;

  lstm_nn_block #(.PB(PB), .PF(PF), .OB(OB), .OF(OF)) dut (.clk, .rst, .ctl, .word, .x_t, .cls, .cls_rdy);

  sl P[102][25];
  sl X[NS][4];
  state_t st;
  int relu_zero = 0, rdy_seen = 0;

  always @(posedge clk) if (cls_rdy) rdy_seen++;
  always @(posedge clk) if (ctl.en && ctl.step == STEP_FC1 && dut.fc_q < 0) relu_zero++;

  task automatic put_word(int a);
    for (int j = 0; j < 25; j++) word[j*PB +: PB] = P[a][j][PB-1:0];
  endtask

  task automatic do_step(step_e s, int idx, int gate, int addr, bit first, bit last);
    ctl.en = 1; ctl.step = s; ctl.idx = 5'(idx); ctl.gate = gate_e'(gate);
    ctl.first_gate = first; ctl.last_sample = last;
    if (addr >= 0) put_word(addr);
    else word = (25*PB)'({$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()});
    @(negedge clk);
    ctl.en = 0;
    x_t = 40'({$urandom(), $urandom()});  // X_t is only valid in the first gate cycle
  endtask

  task automatic window();
    sl o0, o1;
    int ecls;
    rand_params(P, PB, 128);
    for (int t = 0; t < NS; t++)
      for (int c = 0; c < 4; c++) X[t][c] = sl'($signed($urandom_range(1023, 0))) - 512;
    foreach (st.c[i]) begin st.c[i] = 0; st.h[i] = 0; end
    for (int t = 0; t < NS; t++) begin
      for (int c = 0; c < 4; c++) x_t[c] = X[t][c][9:0];
      for (int n = 0; n < 20; n++) begin
        for (int g = 0; g < 4; g++) do_step(STEP_GATE, n, g, 4*n+g, n == 0 && g == 0, t == NS-1);
        do_step(STEP_CELL, n, 0, -1, 0, t == NS-1);
      end
      step(P, X[t], st, k);
      for (int n = 0; n < 20; n++) begin
        checks += 2;
        if (dut.c[n] !== 13'(st.c[n])) begin failures++; if (failures < 10) $display("FAIL t=%0d c[%0d]=%0d exp %0d", t, n, dut.c[n], st.c[n]); end
        if (t < NS-1 && dut.vec[n] !== 13'(st.h[n])) begin failures++; if (failures < 10) $display("FAIL t=%0d h[%0d]=%0d exp %0d", t, n, dut.vec[n], st.h[n]); end
        if (t == NS-1 && dut.vec[n] !== 13'(st.c[n])) begin failures++; if (failures < 10) $display("FAIL FC input %0d", n); end
      end
    end
    for (int j = 0; j < 20; j++) do_step(STEP_FC1, j, 0, 80+j, 0, 0);
    do_step(STEP_FC1_S, 20, 0, -1, 0, 0);
    for (int j = 0; j < 2; j++) do_step(STEP_FC2, j, 0, 100+j, 0, 0);
    do_step(STEP_FC2_S, 2, 0, -1, 0, 0);
    ecls = classify(P, st, k, o0, o1);
    checks += 4;
    if (!cls_rdy) failures++;
    if (cls !== ecls[0]) begin failures++; $display("FAIL cls %0d exp %0d", cls, ecls); end
    if (dut.nxt[0] !== 13'(o0) || dut.nxt[1] !== 13'(o1)) begin failures++; $display("FAIL FC2 out %0d %0d exp %0d %0d", dut.nxt[0], dut.nxt[1], o0, o1); end
    @(negedge clk);
    if (cls_rdy) failures++;   // one-cycle pulse
    // idle cycles change nothing
    repeat (3) @(negedge clk);
  endtask

  initial begin
    ctl = '0; word = '0; x_t = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 3; w++) window();
    checks += 2;
    if (rdy_seen != 3) failures++;
    if (relu_zero == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
