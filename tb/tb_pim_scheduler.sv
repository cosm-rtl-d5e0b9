// tb_pim_scheduler: self-checking test of the PIM command picker.
//
// Random PEQ/PRWQ heads, bank states, windows and PIM engine states are
// applied and the candidate is compared with a reference that applies the
// rules in order: PIM_RdBuf/WrBuf (data bus and buffer free, bus window of at
// least tBL) before PIM_LdBuf/StBuf before PIM_Exec, lowest bank first; a
// bank-level command needs an idle engine (or one paused by the same
// queue), no refresh due, and a bank window covering the row opening, one
// column and the hand-back (tRP+tRCD); if its row is not open the candidate
// is the PRE or ACT that opens it.  Directed cases check each priority.
module tb_pim_scheduler;
  import cosm_pkg::*;

  localparam int unsigned NB = N_BANKS;
  localparam int unsigned NR = N_RANKS;
  localparam int unsigned BPR = NB / NR;

  logic [NB-1:0]     peq_valid, prwq_valid, powner_prwq;
  pim_req_t          peq_head [NB];
  pim_req_t          prwq_head [NB];
  bank_state_t       bs [NB];
  logic [WAIT_W-1:0] rrd_wait [NR];
  logic [WAIT_W-1:0] bus_wait;
  logic [WIN_W-1:0]  window_bank [NB];
  logic [WIN_W-1:0]  window_bus;
  pim_state_e        pstate [NB];
  logic [NR-1:0]     ref_pending;
  logic              cand_valid, cand_is_xfer;
  dram_cmd_t         cand;

  pim_scheduler dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  int n_b = NB;
  dram_cmd_e e_cmd;
  int        e_bank;
  logic      e_st, e_xfer;

  function automatic dram_cmd_e step(int b, pim_req_t q, bit prwq, output logic st);
    bit hit = bs[b].open && bs[b].row == q.row;
    int need = (hit ? 0 : (bs[b].open ? T_RP : 0) + T_RCD) + T_CCD + T_RP + T_RCD;
    st = 0;
    if (pstate[b] == PS_RUN || pstate[b] == PS_PAUSING) return C_NOP;
    if (pstate[b] == PS_PAUSED && powner_prwq[b] != prwq) return C_NOP;
    if (ref_pending[b / BPR] || window_bank[b] < need) return C_NOP;
    if (!hit) begin
      if (bs[b].open) return bs[b].pre_wait == 0 ? C_PRE : C_NOP;
      return (bs[b].act_wait == 0 && rrd_wait[b / BPR] == 0) ? C_ACT : C_NOP;
    end
    if (bs[b].col_wait != 0) return C_NOP;
    case (q.op)
      P_EXEC_LD: return C_PIM_EXEC;
      P_EXEC_ST: begin st = 1; return C_PIM_EXEC; end
      P_LDBUF:   return bs[b].buf_wait == 0 ? C_PIM_LDBUF : C_NOP;
      P_STBUF:   begin st = 1; return bs[b].buf_wait == 0 ? C_PIM_STBUF : C_NOP; end
      default:   return C_NOP;
    endcase
  endfunction

  task automatic reference();
    logic st;
    e_cmd = C_NOP; e_bank = -1; e_st = 0; e_xfer = 0;
    for (int b = 0; b < n_b && e_cmd == C_NOP; b++)
      if (prwq_valid[b] && (prwq_head[b].op == P_RDBUF || prwq_head[b].op == P_WRBUF) &&
          bus_wait == 0 && bs[b].buf_wait == 0 && window_bus >= T_BL) begin
        e_cmd = prwq_head[b].op == P_RDBUF ? C_PIM_RDBUF : C_PIM_WRBUF; e_bank = b; e_xfer = 1;
      end
    for (int b = 0; b < n_b && e_cmd == C_NOP; b++)
      if (prwq_valid[b] && (prwq_head[b].op == P_LDBUF || prwq_head[b].op == P_STBUF)) begin
        e_cmd = step(b, prwq_head[b], 1, st); e_bank = b; e_st = st;
      end
    for (int b = 0; b < n_b && e_cmd == C_NOP; b++)
      if (peq_valid[b]) begin e_cmd = step(b, peq_head[b], 0, st); e_bank = b; e_st = st; end
  endtask

  task automatic clear();
    peq_valid = '0; prwq_valid = '0; powner_prwq = '0; ref_pending = '0;
    bus_wait = '0; window_bus = '1;
    for (int r = 0; r < NR; r++) rrd_wait[r] = '0;
    for (int b = 0; b < n_b; b++) begin
      bs[b] = '0; peq_head[b] = '0; prwq_head[b] = '0; window_bank[b] = '1; pstate[b] = PS_IDLE;
    end
  endtask

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // directed: all three kinds pending -> the bus transfer goes first
    clear();
    peq_valid[3] = 1; peq_head[3].op = P_EXEC_LD; peq_head[3].row = 4;
    prwq_valid[5] = 1; prwq_head[5].op = P_LDBUF; prwq_head[5].row = 4;
    prwq_valid[7] = 1; prwq_head[7].op = P_WRBUF;
    bs[3].open = 1; bs[3].row = 4; bs[5].open = 1; bs[5].row = 4;
    #1 check(cand_valid && cand.cmd == C_PIM_WRBUF && cand.bank == 7 && cand_is_xfer, "WrBuf first");
    prwq_valid[7] = 0;
    #1 check(cand.cmd == C_PIM_LDBUF && cand.bank == 5, "LdBuf second");
    prwq_valid[5] = 0;
    #1 check(cand.cmd == C_PIM_EXEC && cand.bank == 3 && !cand.st, "Exec last");
    window_bank[3] = WIN_W'(T_CCD + T_RP + T_RCD - 1);
    #1 check(!cand_valid, "Exec must wait for a window that fits");
    window_bank[3] = '1; bs[3].row = 9;
    #1 check(cand.cmd == C_PRE && cand.bank == 3, "PRE to open the PIM row");
    for (int n = 0; n < 20000; n++) begin
      clear();
      for (int b = 0; b < n_b; b++) begin
        peq_valid[b]  = ($urandom % 100) < 15;
        prwq_valid[b] = ($urandom % 100) < 10;
        peq_head[b].op = pim_op_e'($urandom % 2); peq_head[b].row = ROW_W'($urandom % 2);
        prwq_head[b].op = pim_op_e'(2 + $urandom % 4); prwq_head[b].row = ROW_W'($urandom % 2);
        bs[b].open = 1'($urandom); bs[b].row = ROW_W'($urandom % 2);
        bs[b].act_wait = WAIT_W'($urandom % 2); bs[b].col_wait = WAIT_W'($urandom % 2);
        bs[b].pre_wait = WAIT_W'($urandom % 2); bs[b].buf_wait = WAIT_W'($urandom % 2);
        window_bank[b] = WIN_W'($urandom % 40);
        pstate[b] = pim_state_e'(($urandom % 3 == 0) ? $urandom % 4 : 0);
        powner_prwq[b] = 1'($urandom);
      end
      for (int r = 0; r < NR; r++) begin
        rrd_wait[r] = WAIT_W'($urandom % 2); ref_pending[r] = ($urandom % 100) < 10;
      end
      bus_wait = WAIT_W'($urandom % 2); window_bus = WIN_W'($urandom % 5);
      #1;
      reference();
      check(cand_valid == (e_cmd != C_NOP), "cand_valid");
      if (e_cmd != C_NOP)
        check(cand.cmd == e_cmd && int'(cand.bank) == e_bank && cand_is_xfer == e_xfer &&
              (e_cmd != C_PIM_EXEC || cand.st == e_st),
              $sformatf("picked %s bank %0d, expected %s bank %0d", cand.cmd.name(), cand.bank,
                        e_cmd.name(), e_bank));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
