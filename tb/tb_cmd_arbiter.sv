// tb_cmd_arbiter: self-checking test of the Command Arbiter.
//
// Directed sequences with random bank numbers and pause points check:
//  - strict priority: a CPU candidate beats a PIM candidate; a CPU ACT to
//    the bank the PIM scheduler is using is deferred (the PIM command goes,
//    ev_defer pulses);
//  - an uninterrupted PIM_Exec ends (pim_done) exactly nPTL cycles after it
//    was issued, and the inferred PIM counter counts one column per tCCD;
//  - a CPU request whose bank window has shrunk to the hand-over time causes
//    a PIM_Pause, never earlier than tCCD after the command; the bank then
//    reports paused, and reissuing the command resumes it (ev_resume) with
//    the remaining columns only: it ends (64 - completed) * tCCD cycles later;
//  - a refresh due in the bank's rank also pauses it.
module tb_cmd_arbiter;
  import cosm_pkg::*;

  localparam int unsigned NB = N_BANKS;
  localparam int unsigned NR = N_RANKS;
  localparam int unsigned NCOL = N_PTL / T_CCD;
  localparam int unsigned PC_W = $clog2(NCOL + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cpu_valid = 0, pim_valid = 0;
  dram_cmd_t         cpu_cand = '0, pim_cand = '0;
  logic [WIN_W-1:0]  window_bank [NB];
  logic [NB-1:0]     bank_pending = '0;
  logic [NR-1:0]     ref_pending = '0;
  dram_cmd_t         issue;
  logic              took_cpu, took_pim, ev_pause, ev_defer, ev_resume;
  logic [RANK_W-1:0] cur_rank;
  pim_state_e        pstate [NB];
  logic [NB-1:0]     powner_prwq, pim_busy, pim_st, pim_done;
  logic [PC_W-1:0]   pc_inf [NB];

  cmd_arbiter dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  longint cyc = 0, t_done = 0, t_pause = 0;
  int     n_done = 0, n_pause = 0, n_resume = 0, n_defer = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (pim_done != '0) begin t_done = cyc; n_done++; end
    if (ev_pause) begin t_pause = cyc; n_pause++; end
    if (ev_resume) n_resume++;
    if (ev_defer) n_defer++;
  end

  int n_b = NB;
  task automatic idle_inputs();
    cpu_valid = 0; pim_valid = 0; bank_pending = '0; ref_pending = '0;
    for (int b = 0; b < n_b; b++) window_bank[b] = '1;
  endtask

  // present a PIM_Exec for one cycle; returns the cycle it was issued
  task automatic send_exec(input int b, input logic st, output longint t);
    @(negedge clk);
    pim_valid = 1; pim_cand = '0; pim_cand.cmd = C_PIM_EXEC; pim_cand.bank = BANK_W'(b);
    pim_cand.st = st;
    #1 check(took_pim && issue == pim_cand, "PIM command not issued");
    @(posedge clk); t = cyc + 1;
    @(negedge clk); pim_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    idle_inputs();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      automatic int b = $urandom % NB;
      automatic int ob = (b + 1) % NB;
      automatic int wait_c = T_CCD + $urandom % (N_PTL - 2 * T_CCD - 4);
      longint t0, t1;
      int done0;
      // priority and deferral
      @(negedge clk);
      cpu_valid = 1; cpu_cand = '0; cpu_cand.cmd = C_RD; cpu_cand.bank = BANK_W'(ob);
      pim_valid = 1; pim_cand = '0; pim_cand.cmd = C_PIM_EXEC; pim_cand.bank = BANK_W'(b);
      #1 check(took_cpu && !took_pim && issue.cmd == C_RD, "CPU must win over PIM");
      cpu_cand.cmd = C_ACT; cpu_cand.bank = BANK_W'(b);
      #1 check(took_pim && !took_cpu && issue.cmd == C_PIM_EXEC && ev_defer, "ACT to the PIM bank must be deferred");
      cpu_valid = 0; pim_valid = 0;
      // uninterrupted command: nPTL cycles
      done0 = n_done;
      send_exec(b, 1'($urandom), t0);
      repeat (N_PTL / 2) @(negedge clk);
      // N_PTL/2 + 1 cycles after the command: column (N_PTL/2)/tCCD is in progress
      check(int'(pc_inf[b]) == (N_PTL / 2) / T_CCD, $sformatf("inferred PC %0d", pc_inf[b]));
      wait (n_done == done0 + 1); @(negedge clk);
      check(t_done - t0 == N_PTL, $sformatf("PIM command took %0d cycles, expected %0d", t_done - t0, N_PTL));
      check(pstate[b] == PS_IDLE, "bank not idle after done");
      check(cur_rank == RANK_W'(b / (NB / NR)), "cur_rank follows the last command");
      // pause by a CPU request, then resume
      send_exec(b, 1'($urandom), t0);
      repeat (wait_c) @(negedge clk);
      if (t % 2) ref_pending[b / (NB / NR)] = 1;
      else begin bank_pending[b] = 1; window_bank[b] = WIN_W'(T_RP + T_RCD); end
      @(posedge clk); #1;
      check(t_pause - t0 >= T_CCD, "pause earlier than tCCD after the command");
      check(t_pause == cyc, "pause not sent at once");
      idle_inputs();
      repeat (T_CCD + 1) @(negedge clk);
      check(pstate[b] == PS_PAUSED && !pim_busy[b], "bank not paused");
      done0 = int'(pc_inf[b]);   // columns completed
      repeat ($urandom % 20) @(negedge clk);
      send_exec(b, 0, t1);
      check(n_resume == t + 1, "no resumption seen");
      wait (pim_done[b]); @(posedge clk); #1;
      check(t_done - t1 == (NCOL - done0) * T_CCD,
            $sformatf("resumed command took %0d cycles for %0d columns", t_done - t1, NCOL - done0));
    end
    check(n_pause == 10, $sformatf("%0d pauses, expected 10", n_pause));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
