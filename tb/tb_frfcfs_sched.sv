// tb_frfcfs_sched: self-checking test of the FR-FCFS command picker.
//
// Random queue contents (8 banks in use, few rows so hits are frequent),
// random bank states, timing waits, PIM-busy banks and refresh requests are
// applied; the candidate is compared with a reference written as a plain
// priority list:
//   1. refresh of a rank that has one due (REF once all its banks are closed
//      and settled, otherwise PRE of an open, non-PIM bank of that rank);
//   2. the oldest ready row hit in the current rank, else in any rank;
//   3. the ACT/PRE of the oldest request of a bank, where a PRE is not sent
//      while another request still hits the open row and no ACT goes to a
//      rank with a refresh due.
// Banks running a PIM command are never touched.  A directed case checks
// that a row hit overtakes an older row miss (first-ready).
module tb_frfcfs_sched;
  import cosm_pkg::*;

  localparam int unsigned QD = 16;
  localparam int unsigned NB = N_BANKS;
  localparam int unsigned NR = N_RANKS;
  localparam int unsigned BPR = NB / NR;

  logic [QD-1:0]     ent_valid;
  cpu_req_t          ent [QD];
  bank_state_t       bs [NB];
  logic [WAIT_W-1:0] rrd_wait [NR];
  logic [WAIT_W-1:0] bus_wait;
  logic [NB-1:0]     pim_busy;
  logic [NR-1:0]     ref_pending;
  logic [RANK_W-1:0] cur_rank;
  logic              cand_valid, cand_is_col;
  dram_cmd_t         cand;
  logic [$clog2(QD)-1:0] cand_idx;

  frfcfs_sched dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  int n_q = QD, n_b = NB, n_r = NR;

  // reference model
  logic      e_valid, e_col;
  dram_cmd_t e_cmd;
  int        e_idx;
  function automatic int rk(int b); return b / BPR; endfunction
  function automatic bit hits(int i);
    return ent_valid[i] && bs[ent[i].bank].open && bs[ent[i].bank].row == ent[i].row;
  endfunction
  task automatic reference();
    e_valid = 0; e_col = 0; e_cmd = '0; e_cmd.cmd = C_NOP; e_idx = -1;
    // 1. refresh, lowest rank first
    for (int r = 0; r < n_r && !e_valid; r++) begin
      if (ref_pending[r]) begin
        automatic bit closed = 1, settled = 1;
        for (int b = r * BPR; b < (r + 1) * BPR; b++) begin
          if (bs[b].open || pim_busy[b]) closed = 0;
          if (bs[b].act_wait != 0) settled = 0;
        end
        if (closed && settled) begin e_valid = 1; e_cmd.cmd = C_REF; e_cmd.bank = BANK_W'(r * BPR); end
        else
          for (int b = r * BPR; b < (r + 1) * BPR && !e_valid; b++)
            if (bs[b].open && !pim_busy[b] && bs[b].pre_wait == 0) begin
              e_valid = 1; e_cmd.cmd = C_PRE; e_cmd.bank = BANK_W'(b);
            end
      end
    end
    if (e_valid) return;
    // 2. oldest ready hit, current rank first
    for (int pass = 0; pass < 2 && !e_valid; pass++)
      for (int i = 0; i < n_q && !e_valid; i++) begin
        automatic int b = ent[i].bank;
        if (hits(i) && !pim_busy[b] && bs[b].col_wait == 0 && bus_wait == 0 &&
            (pass == 1 || rk(b) == int'(cur_rank))) begin
          e_valid = 1; e_col = 1; e_idx = i;
          e_cmd.cmd = ent[i].we ? C_WR : C_RD; e_cmd.bank = ent[i].bank;
          e_cmd.row = ent[i].row; e_cmd.col = ent[i].col;
        end
      end
    if (e_valid) return;
    // 3. oldest request of its bank: PRE or ACT
    for (int i = 0; i < n_q && !e_valid; i++) begin
      automatic int b = ent[i].bank;
      automatic bit first = ent_valid[i];
      automatic bit hit_other = 0;
      for (int j = 0; j < i; j++) if (ent_valid[j] && ent[j].bank == ent[i].bank) first = 0;
      for (int j = 0; j < n_q; j++) if (hits(j) && ent[j].bank == ent[i].bank) hit_other = 1;
      if (first && !hits(i) && !pim_busy[b]) begin
        if (bs[b].open && bs[b].pre_wait == 0 && !hit_other) begin
          e_valid = 1; e_idx = i; e_cmd.cmd = C_PRE; e_cmd.bank = ent[i].bank; e_cmd.row = ent[i].row;
        end else if (!bs[b].open && bs[b].act_wait == 0 && rrd_wait[rk(b)] == 0 && !ref_pending[rk(b)]) begin
          e_valid = 1; e_idx = i; e_cmd.cmd = C_ACT; e_cmd.bank = ent[i].bank; e_cmd.row = ent[i].row;
        end
      end
    end
  endtask

  task automatic randomize_state(input int ref_pct);
    for (int i = 0; i < n_q; i++) begin
      ent_valid[i] = ($urandom % 100) < 70;
      ent[i].we = 1'($urandom); ent[i].bank = BANK_W'(($urandom % 4) + BPR * ($urandom % 2));
      ent[i].row = ROW_W'($urandom % 3); ent[i].col = COL_W'($urandom); ent[i].tag = TAG_W'(i);
    end
    // the queue is compacted: valid entries first
    for (int i = 1; i < n_q; i++) if (!ent_valid[i - 1]) ent_valid[i] = 0;
    for (int b = 0; b < n_b; b++) begin
      bs[b] = '0;
      bs[b].open = 1'($urandom);
      bs[b].row = ROW_W'($urandom % 3);
      bs[b].act_wait = WAIT_W'(($urandom % 3 == 0) ? $urandom % 5 : 0);
      bs[b].col_wait = WAIT_W'(($urandom % 3 == 0) ? $urandom % 5 : 0);
      bs[b].pre_wait = WAIT_W'(($urandom % 3 == 0) ? $urandom % 5 : 0);
    end
    for (int r = 0; r < n_r; r++) rrd_wait[r] = WAIT_W'(($urandom % 4 == 0) ? 1 : 0);
    bus_wait = WAIT_W'(($urandom % 4 == 0) ? 1 : 0);
    pim_busy = '0;
    for (int b = 0; b < n_b; b++) pim_busy[b] = ($urandom % 100) < 15;
    for (int r = 0; r < n_r; r++) ref_pending[r] = ($urandom % 100) < ref_pct;
    cur_rank = RANK_W'($urandom % NR);
  endtask

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // directed: a younger row hit is served before an older row miss
    randomize_state(0);
    ent_valid = '0; ent_valid[1:0] = 2'b11; pim_busy = '0; bus_wait = '0;
    for (int b = 0; b < n_b; b++) bs[b] = '0;
    ent[0].bank = 0; ent[0].row = 1; ent[1].bank = 0; ent[1].row = 2; ent[1].we = 0;
    bs[0].open = 1; bs[0].row = 2;
    #1;
    check(cand_valid && cand.cmd == C_RD && cand_idx == 1, "row hit not served first");
    for (int n = 0; n < 20000; n++) begin
      randomize_state(n % 2 ? 10 : 0);
      #1;
      reference();
      check(cand_valid == e_valid, $sformatf("valid %0d, expected %0d", cand_valid, e_valid));
      if (e_valid) begin
        check(cand.cmd == e_cmd.cmd && cand.bank == e_cmd.bank,
              $sformatf("picked %s bank %0d, expected %s bank %0d", cand.cmd.name(), cand.bank,
                        e_cmd.cmd.name(), e_cmd.bank));
        check(cand_is_col == e_col, "cand_is_col");
        if (e_col) check(int'(cand_idx) == e_idx && cand.col == e_cmd.col && cand.row == e_cmd.row,
                         "column command entry");
        if (e_cmd.cmd == C_ACT) check(cand.row == e_cmd.row, "ACT row");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
