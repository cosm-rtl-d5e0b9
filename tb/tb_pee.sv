// tb_pee: self-checking test of the PIM Execution Engine.
//
// Drives start/pause at the falling clock edge and watches the column
// operations at the rising edge.  Checks:
//  - an uninterrupted command issues NPTL/tCCD columns, one every tCCD
//    cycles, with consecutive addresses from the start column and PC = 0..,
//    and done comes exactly NPTL cycles after the command (the command
//    latency of the paper's timing example);
//  - a pause at a random cycle stops the column stream after at most the
//    column of that cycle, csc_valid stays set while paused, and reissuing the
//    command (with a different start column, which must be ignored) resumes at
//    the next column, so every column is visited exactly once;
//  - after done the engine is idle again (csc_valid = 0).
// Default parameters (tCCD = 2, nPTL = 128).
module tb_pee;
  import cosm_pkg::*;

  localparam int unsigned NCOL = N_PTL / T_CCD;
  localparam int unsigned PC_W = $clog2(NCOL + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            start = 0, pause = 0;
  pim_kind_e       start_kind = K_EXEC_LD;
  logic [COL_W-1:0] start_col = '0;
  logic            col_valid, running, csc_valid, done;
  logic [COL_W-1:0] col_addr;
  logic [PC_W-1:0] col_idx;
  pim_kind_e       col_kind;

  pee dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // monitor
  longint cyc = 0, t_start = 0, t_done = 0, t_last_col = 0;
  int     ncol = 0, exp_col = 0, exp_idx = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (start && !csc_valid) begin t_start = cyc; ncol = 0; end
    if (col_valid) begin
      check(int'(col_addr) == exp_col, $sformatf("column %0d, expected %0d", col_addr, exp_col));
      check(int'(col_idx) == exp_idx, $sformatf("PC %0d, expected %0d", col_idx, exp_idx));
      check(col_kind == start_kind, "kind");
      if (ncol > 0) check(cyc - t_last_col >= T_CCD, "columns closer than tCCD");
      t_last_col = cyc;
      exp_col++; exp_idx++; ncol++;
    end
    if (done) begin t_done = cyc; n_done++; end
  end

  task automatic cmd(input pim_kind_e k, input int col);
    @(negedge clk);
    start = 1; start_kind = k; start_col = COL_W'(col);
    @(negedge clk);
    start = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int ntrials = 20;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. uninterrupted command: latency nPTL
    exp_col = 64; exp_idx = 0;
    cmd(K_EXEC_LD, 64);
    wait (n_done == 1); @(negedge clk);
    check(ncol == NCOL, $sformatf("%0d columns, expected %0d", ncol, NCOL));
    check(t_done - t_start == N_PTL, $sformatf("latency %0d, expected %0d", t_done - t_start, N_PTL));
    check(!csc_valid && !running, "engine not idle after done");

    // 2. random pause and resume
    for (int t = 0; t < ntrials; t++) begin
      automatic int base = ($urandom % 2) * 64;
      automatic int wait_c = 1 + $urandom % (N_PTL - 4);
      automatic int gap = 1 + $urandom % 20;
      int before_n;
      automatic pim_kind_e k = pim_kind_e'($urandom % 4);
      exp_col = base; exp_idx = 0;
      cmd(k, base);
      repeat (wait_c - 1) @(negedge clk);
      if (!running) continue;
      pause = 1; @(negedge clk); pause = 0;
      repeat (T_CCD + 1) @(negedge clk);
      check(csc_valid && !running, "not frozen after pause");
      before_n = ncol;
      repeat (gap) @(negedge clk);
      check(ncol == before_n, "column issued while paused");
      cmd(k, (base + 33) % 128);   // start column must be ignored
      wait (n_done == t + 2); @(negedge clk);
      check(ncol == NCOL, $sformatf("trial %0d: %0d columns after resume, expected %0d", t, ncol, NCOL));
      check(!csc_valid, "csc still valid after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
