// tb_configs: the seven bit-width configurations evaluated for the
// accelerator (parameter format / operation format):
//   #1 (10,8)/(13,8)  #2 (10,8)/(13,9)  #3 (10,8)/(12,8)
//   #4 (9,7)/(13,8)   #5 (9,7)/(13,9)   #6 (9,7)/(12,8)   #7 (8,6)/(13,9)
// One accelerator per configuration, each loaded with random parameters
// within +-1.0 and run through one full 96-sample window (sample every
// 100 cycles); cls, both output neurons and the 9624-cycle latency are
// compared with the reference model of the same configuration.
module tb_configs;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, done = 0;

  localparam int NCFG = 7;
  localparam int CPB [NCFG] = '{10, 10, 10, 9, 9, 9, 8};
  localparam int CPF [NCFG] = '{8, 8, 8, 7, 7, 7, 6};
  localparam int COB [NCFG] = '{13, 13, 12, 13, 13, 12, 13};
  localparam int COF [NCFG] = '{8, 9, 8, 8, 9, 8, 9};
  localparam int NS = 96;

  logic rst = 1;

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int PB = CPB[g], PF = CPF[g], OB = COB[g], OF = COF[g];

    logic                   mem_en = 0, wr_rd = 1, x_rdy = 0, cls, cls_rdy;
    logic [6:0]             mem_addr = 0;
    logic [25*PB-1:0]       mem_wdata = '0;
    logic signed [3:0][9:0] x_t = '0;

    lstm_accel_top #(.PB(PB), .PF(PF), .OB(OB), .OF(OF)) dut (
      .clk, .rst, .mem_en, .mem_addr, .mem_wdata, .wr_rd, .x_t, .x_rdy, .cfg_steps(8'(NS)), .cls, .cls_rdy);

    sl P[102][25];
    sl X[NS][4];
    longint cyc = 0, t0 = -1, t1 = -1;
    always @(posedge clk) if (!rst) begin
      cyc++;
      if (dut.ctl.en && dut.ctl.first_gate && dut.u_ctrl.cur.t == 0 && t0 < 0) t0 = cyc;
      if (cls_rdy && t1 < 0) t1 = cyc;
    end

    initial begin
      cfg_t k;
      state_t st;
      sl o0, o1;
      int e;
      k = '{pb: PB, pf: PF, ob: OB, of_: OF, fc_from_h: 0};
      rand_params(P, PB, 1 << PF);
      for (int t = 0; t < NS; t++)
        for (int c = 0; c < 4; c++) X[t][c] = sl'($signed($urandom_range(1023, 0))) - 512;
      wait (!rst);
      @(posedge clk);
      for (int a = 0; a < 102; a++) begin
        logic [25*PB-1:0] w;
        for (int j = 0; j < 25; j++) w[j*PB +: PB] = P[a][j][PB-1:0];
        mem_en <= 1; mem_addr <= 7'(a); mem_wdata <= w;
        @(posedge clk);
      end
      mem_en <= 0; wr_rd <= 0;
      for (int t = 0; t < NS; t++) begin
        repeat (100) @(posedge clk);
        for (int c = 0; c < 4; c++) x_t[c] <= X[t][c][9:0];
        x_rdy <= 1;
        @(posedge clk);
        x_rdy <= 0;
      end
      while (t1 < 0) @(posedge clk);
      foreach (st.c[i]) begin st.c[i] = 0; st.h[i] = 0; end
      for (int t = 0; t < NS; t++) step(P, X[t], st, k);
      e = classify(P, st, k, o0, o1);
      checks += 3;
      if (cls !== e[0]) begin failures++; $display("FAIL config #%0d: cls %0d expected %0d", g + 1, cls, e); end
      if (dut.u_nn.nxt[0] !== OB'(o0) || dut.u_nn.nxt[1] !== OB'(o1)) begin
        failures++; $display("FAIL config #%0d: output neurons differ (expected %0d %0d)", g + 1, o0, o1);
      end
      // samples arrive every 101 cycles, one more than a sample needs
      if (t1 - t0 != 9624 + 95) begin failures++; $display("FAIL config #%0d: %0d cycles", g + 1, t1 - t0); end
      $display("config #%0d FxP(%0d,%0d)/FxP(%0d,%0d): cls=%0d, outputs %0d %0d", g + 1, PB, PF, OB, OF, cls, o0, o1);
      done++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
