// pim_scheduler: chooses the PIM candidate command of each cycle.
//
// Priority, as the paper orders it:
//  1. PIM_RdBuf / PIM_WrBuf at a PRWQ head, when the data bus is free and the
//     bus idle window from the IWE holds the whole burst (window_bus >= tBL),
//     so the transfer ends before the next predicted CPU burst.
//  2. PIM_LdBuf / PIM_StBuf at a PRWQ head, so the buffer is filled or drained
//     before later bus transfers need it.
//  3. PIM_Exec at a PEQ head.
// A bank-level command (2 or 3) is eligible when the bank's PEE is not busy
// (or is paused on this very command, which is then reissued to resume it),
// no refresh is due in its rank, and the bank idle window covers opening the
// PIM row (PRE/ACT as needed), at least one column (tCCD) and reopening the
// CPU row afterwards (tRP + tRCD).  If the PIM row is not open the candidate
// is the PRE or ACT that opens it; the PIM command follows tRCD after ACT.
// Among banks the lowest index wins.  The order and the window test follow
// the paper; the exact window threshold and the bank tie-break are this
// design's choices.
module pim_scheduler
  import cosm_pkg::*;
#(
  parameter int unsigned NB = N_BANKS,
  parameter int unsigned NR = N_RANKS
)(
  input  logic [NB-1:0]     peq_valid,
  input  pim_req_t          peq_head [NB],
  input  logic [NB-1:0]     prwq_valid,
  input  pim_req_t          prwq_head [NB],
  input  bank_state_t       bs [NB],
  input  logic [WAIT_W-1:0] rrd_wait [NR],
  input  logic [WAIT_W-1:0] bus_wait,
  input  logic [WIN_W-1:0]  window_bank [NB],
  input  logic [WIN_W-1:0]  window_bus,
  input  pim_state_e        pstate [NB],
  input  logic [NB-1:0]     powner_prwq,
  input  logic [NR-1:0]     ref_pending,
  output logic              cand_valid,
  output dram_cmd_t         cand,
  output logic              cand_is_xfer   // PIM_RdBuf/WrBuf: pop PRWQ on issue
);

  localparam int unsigned BPR = NB / NR;

  // Try to serve bank-level request q on bank b; returns the command to issue
  // (C_NOP if none can go this cycle).
  function automatic dram_cmd_t bank_step(input int unsigned b, input pim_req_t q,
                                          input logic from_prwq);
    dram_cmd_t c;
    int unsigned need;
    logic hit;
    c      = '0;
    c.cmd  = C_NOP;
    c.bank = BANK_W'(b);
    c.row  = q.row;
    c.col  = q.col;
    if (pstate[b] == PS_RUN || pstate[b] == PS_PAUSING) return c;
    if (pstate[b] == PS_PAUSED && powner_prwq[b] != from_prwq) return c;
    if (ref_pending[b / BPR]) return c;
    hit  = bs[b].open && (bs[b].row == q.row);
    need = (hit ? 0 : ((bs[b].open ? T_RP : 0) + T_RCD)) + T_CCD + T_RP + T_RCD;
    if (int'(window_bank[b]) < int'(need)) return c;
    if (hit) begin
      if (bs[b].col_wait != '0) return c;
      unique case (q.op)
        P_EXEC_LD: begin c.cmd = C_PIM_EXEC; c.st = 1'b0; end
        P_EXEC_ST: begin c.cmd = C_PIM_EXEC; c.st = 1'b1; end
        P_LDBUF:   if (bs[b].buf_wait == '0) c.cmd = C_PIM_LDBUF;
        P_STBUF:   if (bs[b].buf_wait == '0) begin c.cmd = C_PIM_STBUF; c.st = 1'b1; end
        default: ;
      endcase
    end else if (bs[b].open) begin
      if (bs[b].pre_wait == '0) c.cmd = C_PRE;
    end else begin
      if (bs[b].act_wait == '0 && rrd_wait[b / BPR] == '0) c.cmd = C_ACT;
    end
    return c;
  endfunction

  always_comb begin
    cand_valid   = 1'b0;
    cand         = '0;
    cand.cmd     = C_NOP;
    cand_is_xfer = 1'b0;
    // 3. PIM_Exec
    for (int b = NB - 1; b >= 0; b--) begin
      if (peq_valid[b]) begin
        automatic dram_cmd_t c = bank_step(b, peq_head[b], 1'b0);
        if (c.cmd != C_NOP) begin cand_valid = 1'b1; cand = c; end
      end
    end
    // 2. PIM_LdBuf / PIM_StBuf
    for (int b = NB - 1; b >= 0; b--) begin
      if (prwq_valid[b] && (prwq_head[b].op == P_LDBUF || prwq_head[b].op == P_STBUF)) begin
        automatic dram_cmd_t c = bank_step(b, prwq_head[b], 1'b1);
        if (c.cmd != C_NOP) begin cand_valid = 1'b1; cand = c; end
      end
    end
    // 1. PIM_RdBuf / PIM_WrBuf
    for (int b = NB - 1; b >= 0; b--) begin
      if (prwq_valid[b] && (prwq_head[b].op == P_RDBUF || prwq_head[b].op == P_WRBUF) &&
          bus_wait == '0 && bs[b].buf_wait == '0 && int'(window_bus) >= int'(T_BL)) begin
        cand_valid   = 1'b1;
        cand         = '0;
        cand.cmd     = (prwq_head[b].op == P_RDBUF) ? C_PIM_RDBUF : C_PIM_WRBUF;
        cand.bank    = BANK_W'(b);
        cand_is_xfer = 1'b1;
      end
    end
  end

endmodule
