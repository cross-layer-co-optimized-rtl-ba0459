// tb_lstm_accel_top: end-to-end test of the accelerator at its default
// size (20 cells, 96 samples, parameters FxP(9,7), operations FxP(13,9)).
//
// The host side loads 102 random parameter words through the MEM port in
// write mode and then plays windows of 96 random samples, comparing cls
// and the two output neurons with the reference model:
//   window 1  x_rdy held high, a new sample every 100 cycles: checks that
//             cls_rdy comes exactly 9624 cycles after the first sample
//   window 2  one-cycle x_rdy pulses with random gaps, as a sensor does:
//             the accelerator waits for each sample
//   window 3  aborted after 30 samples by switching to write mode and
//             loading a new parameter set
//   window 4  a full window with the new parameters
//   window 5  the step count is changed to 40 in write mode, without
//             touching the parameters, and a 40-sample window is run
// Each mechanism (parameter write, waiting for x_rdy, restart after a
// classification, abort, ReLU clipping, activation tails, clamped cell
// state, step-count change) is counted and must occur at least once.
module tb_lstm_accel_top;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int PB = 9, PF = 7, OB = 13, OF = 9, NS = 96;
  cfg_t k = '{pb: PB, pf: PF, ob: OB, of_: OF, fc_from_h: 0};

  logic                    rst = 1;
  logic                    mem_en = 0;
  logic [6:0]              mem_addr = 0;
  logic [25*PB-1:0]        mem_wdata = '0;
  logic                    wr_rd = 1;
  logic signed [3:0][9:0]  x_t = '0;
  logic                    x_rdy = 0;
  logic                    cls, cls_rdy;
  logic [7:0]              cfg_steps = 8'(NS);
  int                      ns = NS;         // samples in the current window

  lstm_accel_top dut (.clk, .rst, .mem_en, .mem_addr, .mem_wdata, .wr_rd, .x_t, .x_rdy, .cfg_steps, .cls, .cls_rdy);

  sl P[102][25];
  sl X[NS][4];

  // mechanism counters
  int n_written = 0, n_reconf = 0, n_wait = 0, n_windows = 0, n_abort = 0, n_relu = 0, n_tail = 0, n_cclamp = 0;
  int n_steps = 0, cls_count[2] = '{0, 0};
  longint cycle = 0, t_first = -1, t_rdy = -1;

  always @(posedge clk) begin
    cycle++;
    if (!rst && dut.ctl.en && dut.ctl.first_gate && dut.u_ctrl.cur.t == 0 && t_first < 0) t_first = cycle;
    if (!rst && cls_rdy && t_rdy < 0) t_rdy = cycle;
  end

  always @(posedge clk) if (!rst) begin
    if (wr_rd && mem_en) n_written++;
    if (!wr_rd && dut.u_ctrl.primed && dut.u_ctrl.wait_x && !x_rdy) n_wait++;
    if (dut.ctl.en) n_steps++;
    if (dut.ctl.en && dut.ctl.step == STEP_FC1 && dut.u_nn.fc_q < 0) n_relu++;
    if (dut.ctl.en && (dut.u_nn.u_act.lo_tail || dut.u_nn.u_act.hi_tail)) n_tail++;
    if (dut.ctl.en && dut.ctl.step == STEP_CELL && dut.u_nn.c_sum[OB] != dut.u_nn.c_sum[OB-1]) n_cclamp++;
  end

  task automatic load_params(int range, bit drive_cell0 = 0);
    rand_params(P, PB, range);
    // cell 0 driven hard by input channel 0: i, f and g close to 1, so
    // its state grows by about one per sample until it clamps
    if (drive_cell0)
      for (int g = 0; g < 3; g++) begin
        for (int j = 0; j < 25; j++) P[g][j] = 0;
        P[g][20] = 255;
        P[g][24] = 255;
      end
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

  task automatic new_samples();
    for (int t = 0; t < ns; t++)
      for (int c = 0; c < 4; c++) X[t][c] = sl'($signed($urandom_range(1023, 0))) - 512;
  endtask

  task automatic set_x(int t);
    for (int c = 0; c < 4; c++) x_t[c] <= X[t][c][9:0];
  endtask

  // compare the result; called at the cycle cls_rdy is high
  task automatic check_result(string tag);
    state_t st;
    sl o0, o1;
    int e;
    foreach (st.c[i]) begin st.c[i] = 0; st.h[i] = 0; end
    for (int t = 0; t < ns; t++) step(P, X[t], st, k);
    e = classify(P, st, k, o0, o1);
    checks += 2;
    if (cls !== e[0]) begin failures++; $display("FAIL %s: cls %0d expected %0d", tag, cls, e); end
    if (dut.u_nn.nxt[0] !== 13'(o0) || dut.u_nn.nxt[1] !== 13'(o1)) begin
      failures++;
      $display("FAIL %s: outputs %0d %0d expected %0d %0d", tag, dut.u_nn.nxt[0], dut.u_nn.nxt[1], o0, o1);
    end
    cls_count[cls]++;
    n_windows++;
    $display("%s: cls=%0d (outputs expected %0d %0d)", tag, cls, o0, o1);
  endtask

  task automatic wait_cls(output int cycles);
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!cls_rdy);
  endtask

  initial begin
    int cyc, steps0;
    repeat (3) @(posedge clk);
    rst <= 0;
    load_params(128);

    // window 1: back to back, x_rdy held high
    new_samples();
    set_x(0);
    x_rdy <= 1;
    @(posedge clk);                  // SRAM primed; sample 0 is taken at the next edge
    steps0 = n_steps;
    for (int t = 1; t < NS; t++) begin
      @(posedge clk);                // sample t-1 taken at this edge
      repeat (99) @(posedge clk);
      set_x(t);
    end
    @(posedge clk);                  // last sample taken
    x_rdy <= 0;
    wait_cls(cyc);
    @(negedge clk);
    cyc = int'(t_rdy - t_first);     // cycles from the first sample to cls_rdy
    checks++;
    if (cyc != 9624) begin failures++; $display("FAIL window 1 took %0d cycles, expected 9624", cyc); end
    else $display("window 1: classification %0d cycles after the first sample", cyc);
    check_result("window 1");
    checks++;
    if (n_steps - steps0 != 9624) begin failures++; $display("FAIL %0d steps", n_steps - steps0); end

    // window 2: sensor-like pulses
    new_samples();
    steps0 = n_steps;
    for (int t = 0; t < NS; t++) begin
      repeat ($urandom_range(140, 101)) @(posedge clk);
      set_x(t); x_rdy <= 1;
      @(posedge clk);
      x_rdy <= 0;
    end
    wait_cls(cyc);
    check_result("window 2");
    checks++;
    if (n_steps - steps0 != 9624) begin failures++; $display("FAIL %0d steps in window 2", n_steps - steps0); end

    // window 3: abort after 30 samples, load new parameters
    new_samples();
    for (int t = 0; t < 30; t++) begin
      repeat (110) @(posedge clk);
      set_x(t); x_rdy <= 1;
      @(posedge clk);
      x_rdy <= 0;
    end
    repeat (20) @(posedge clk);
    n_abort++;
    load_params(100, 1);

    // window 4: full window with the new parameters, channel 0 positive
    new_samples();
    for (int t = 0; t < NS; t++) X[t][0] = 256 + sl'($urandom_range(255, 0));
    for (int t = 0; t < NS; t++) begin
      repeat (105) @(posedge clk);
      set_x(t); x_rdy <= 1;
      @(posedge clk);
      x_rdy <= 0;
    end
    wait_cls(cyc);
    check_result("window 4");

    // window 5: 40 samples per window, set in write mode
    @(posedge clk);
    wr_rd <= 1;
    repeat (3) @(posedge clk);
    ns = 40;
    cfg_steps <= 8'(ns);
    n_reconf++;
    repeat (3) @(posedge clk);
    wr_rd <= 0;
    new_samples();
    steps0 = n_steps;
    for (int t = 0; t < ns; t++) begin
      repeat (105) @(posedge clk);
      set_x(t); x_rdy <= 1;
      @(posedge clk);
      x_rdy <= 0;
    end
    wait_cls(cyc);
    check_result("window 5");
    checks++;
    if (n_steps - steps0 != 40*100 + 24) begin failures++; $display("FAIL %0d steps in window 5", n_steps - steps0); end

    $display("mechanisms: written %0d, step-count changes %0d, x_rdy waits %0d, windows %0d, aborts %0d, ReLU clips %0d, activation tails %0d, c clamps %0d, classes %0d/%0d",
             n_written, n_reconf, n_wait, n_windows, n_abort, n_relu, n_tail, n_cclamp, cls_count[0], cls_count[1]);
    checks += 8;
    if (n_written != 204) failures++;
    if (n_reconf == 0) failures++;
    if (n_wait == 0) failures++;
    if (n_windows != 4) failures++;
    if (n_abort == 0) failures++;
    if (n_relu == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    if (n_tail == 0) begin failures++; $display("FAIL activation tail never reached"); end
    if (n_cclamp == 0) begin failures++; $display("FAIL cell state never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (90000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
