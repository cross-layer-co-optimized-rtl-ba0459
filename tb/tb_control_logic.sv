// tb_control_logic: runs the sequencer for windows of 3 samples (counts
// scale as 3*20*5 + 21 + 3 = 324 steps per window) and checks, step by
// step, the order of the schedule, that the word a step needs was
// requested in the cycle before, the number of executed steps per
// window, the x_rdy wait, and that wr_rd hands the SRAM port to MEM and
// restarts the schedule.
module tb_control_logic;
  import lstm_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NS = 3;
  logic             rst = 1, wr_rd = 0, x_rdy = 0, mem_en = 0;
  logic [6:0]       mem_addr = 0;
  logic             sram_en, sram_we;
  logic [6:0]       sram_addr;
  ctl_t             ctl;

  control_logic dut (.clk, .rst, .wr_rd, .x_rdy, .cfg_steps(8'(NS)), .mem_en, .mem_addr, .sram_en, .sram_we, .sram_addr, .ctl);

  // expected schedule
  typedef struct { step_e st; int idx; int gate; int addr; bit first; bit last; } exp_t;
  exp_t sched[$];
  int pos = 0;
  int last_read = -1;
  int executed = 0, stalls = 0, windows = 0;
  bit x_mode_random = 0;

  initial begin
    for (int t = 0; t < NS; t++)
      for (int n = 0; n < 20; n++) begin
        for (int g = 0; g < 4; g++) sched.push_back('{STEP_GATE, n, g, 4*n+g, (n == 0 && g == 0), t == NS-1});
        sched.push_back('{STEP_CELL, n, 0, -1, 0, t == NS-1});
      end
    for (int j = 0; j < 20; j++) sched.push_back('{STEP_FC1, j, 0, 80+j, 0, 0});
    sched.push_back('{STEP_FC1_S, 20, 0, -1, 0, 0});
    for (int j = 0; j < 2; j++) sched.push_back('{STEP_FC2, j, 0, 100+j, 0, 0});
    sched.push_back('{STEP_FC2_S, 2, 0, -1, 0, 0});
  end

  // monitor
  always @(negedge clk) if (!rst && !wr_rd) begin
    if (ctl.en) begin
      exp_t e;
      e = sched[pos];
      checks++;
      if (ctl.step != e.st || int'(ctl.idx) != e.idx || (e.st == STEP_GATE && (int'(ctl.gate) != e.gate || ctl.first_gate != e.first))
          || ((e.st == STEP_GATE || e.st == STEP_CELL) && ctl.last_sample != e.last)) begin
        failures++;
        if (failures < 10) $display("FAIL pos %0d: step %s idx %0d gate %0d", pos, ctl.step.name(), ctl.idx, ctl.gate);
      end
      if (e.addr >= 0) begin
        checks++;
        if (last_read != e.addr) begin
          failures++;
          if (failures < 10) $display("FAIL pos %0d: word %0d not prefetched (last read %0d)", pos, e.addr, last_read);
        end
      end
      executed++;
      pos = (pos + 1) % sched.size();
      if (pos == 0) windows++;
    end else if (ctl.first_gate && !x_rdy) stalls++;
    last_read = (sram_en && !sram_we) ? int'(sram_addr) : last_read;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // window 1: x_rdy always high, count the cycles
    x_rdy <= 1;
    begin
      int cyc;
      cyc = 0;
      while (windows == 0) begin @(posedge clk); cyc++; end
      // one cycle to prime the SRAM read after reset, then 324 steps
      checks++;
      if (cyc != NS*100 + 24 + 1) begin failures++; $display("FAIL window took %0d cycles", cyc); end
    end
    // window 2: x_rdy only now and then
    x_rdy = 0;
    while (windows == 1) begin
      @(posedge clk);
      x_rdy <= ($urandom_range(3, 0) == 0);
    end
    x_rdy <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (executed != 2 * (NS*100 + 24)) begin failures++; $display("FAIL executed %0d", executed); end
    // write mode: MEM owns the SRAM, nothing executes
    wr_rd <= 1; x_rdy <= 1;
    for (int a = 0; a < 8; a++) begin
      mem_en <= 1; mem_addr <= 7'(a * 13);
      @(negedge clk);
      checks++;
      if (!(sram_en && sram_we && sram_addr == 7'(a * 13)) || ctl.en) failures++;
      @(posedge clk);
    end
    mem_en <= 0;
    // abort in the middle of a window and restart from the first step
    wr_rd <= 0;
    repeat (57) @(posedge clk);
    wr_rd <= 1;
    @(negedge clk);
    pos = 0; last_read = -1;
    @(posedge clk);
    wr_rd <= 0;
    while (windows == 2) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no x_rdy stall seen"); end
    $display("stalls %0d windows %0d", stalls, windows);
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
