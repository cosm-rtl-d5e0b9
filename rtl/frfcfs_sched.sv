// frfcfs_sched: the conventional CPU-side scheduler (First-Ready,
// First-Come First-Serve) plus refresh.
//
// Each cycle it proposes at most one command, combinationally:
//  1. REF to a rank whose refresh is due, once all its banks are closed and
//     free of PIM work; before that, PRE to the rank's open banks.
//  2. A ready row-hit RD/WR, oldest first, preferring the rank of the last
//     issued command (requests of one rank are grouped to avoid rank
//     switches, as the IWE assumes).
//  3. Otherwise the oldest ready PRE (row conflict) or ACT (row closed) for
//     the earliest-arriving request of a bank.  A row is not closed while a
//     pending request still hits it; no ACT goes to a rank with a refresh due.
// A bank whose PEE is running (pim_busy) is skipped: the arbiter must pause
// it first.  col_issue/cand_idx tell the queue which entry a RD/WR serves.
// FR-FCFS itself is the paper's baseline policy; the refresh handling and the
// exact tie-breaks are this design's choices.
module frfcfs_sched
  import cosm_pkg::*;
#(
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned NB     = N_BANKS,
  parameter int unsigned NR     = N_RANKS,
  localparam int unsigned QI_W  = $clog2(QDEPTH)
)(
  input  logic [QDEPTH-1:0] ent_valid,
  input  cpu_req_t          ent [QDEPTH],
  input  bank_state_t       bs [NB],
  input  logic [WAIT_W-1:0] rrd_wait [NR],
  input  logic [WAIT_W-1:0] bus_wait,
  input  logic [NB-1:0]     pim_busy,
  input  logic [NR-1:0]     ref_pending,
  input  logic [RANK_W-1:0] cur_rank,
  output logic              cand_valid,
  output dram_cmd_t         cand,
  output logic              cand_is_col,
  output logic [QI_W-1:0]   cand_idx
);

  localparam int unsigned BPR = NB / NR;

  logic [QDEPTH-1:0] hit, hit_ready, oth_ready, bank_first;
  logic [NB-1:0]     bank_hit_pending;

  always_comb begin
    // which entries hit their bank's open row, and which are the oldest of their bank
    bank_hit_pending = '0;
    bank_first       = '0;
    for (int i = 0; i < QDEPTH; i++) begin
      automatic logic older_same = 1'b0;
      for (int j = 0; j < i; j++)
        if (ent_valid[j] && ent[j].bank == ent[i].bank) older_same = 1'b1;
      bank_first[i] = ent_valid[i] && !older_same;
      hit[i] = ent_valid[i] && bs[ent[i].bank].open && (bs[ent[i].bank].row == ent[i].row);
      if (hit[i]) bank_hit_pending[ent[i].bank] = 1'b1;
    end
    for (int i = 0; i < QDEPTH; i++) begin
      automatic int unsigned b = int'(ent[i].bank);
      automatic int unsigned r = b / BPR;
      hit_ready[i] = hit[i] && !pim_busy[b] && bs[b].col_wait == '0 && bus_wait == '0;
      oth_ready[i] = 1'b0;
      if (bank_first[i] && !hit[i] && !pim_busy[b]) begin
        if (bs[b].open)
          oth_ready[i] = (bs[b].pre_wait == '0) && !bank_hit_pending[b];
        else
          oth_ready[i] = (bs[b].act_wait == '0) && (rrd_wait[r] == '0) && !ref_pending[r];
      end
    end

    cand_valid  = 1'b0;
    cand        = '0;
    cand.cmd    = C_NOP;
    cand_is_col = 1'b0;
    cand_idx    = '0;

    // 3. other ready commands, oldest first (lowest priority, so written first)
    for (int i = QDEPTH - 1; i >= 0; i--) begin
      if (oth_ready[i]) begin
        cand_valid = 1'b1;
        cand.cmd   = bs[ent[i].bank].open ? C_PRE : C_ACT;
        cand.bank  = ent[i].bank;
        cand.row   = ent[i].row;
        cand.col   = '0;
        cand_is_col = 1'b0;
        cand_idx   = QI_W'(i);
      end
    end
    // 2. row hits, any rank, then the current rank
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = QDEPTH - 1; i >= 0; i--) begin
        if (hit_ready[i] && (pass == 0 || rank_of(ent[i].bank) == cur_rank)) begin
          cand_valid  = 1'b1;
          cand.cmd    = ent[i].we ? C_WR : C_RD;
          cand.bank   = ent[i].bank;
          cand.row    = ent[i].row;
          cand.col    = ent[i].col;
          cand_is_col = 1'b1;
          cand_idx    = QI_W'(i);
        end
      end
    end
    // 1. refresh
    for (int r = NR - 1; r >= 0; r--) begin
      if (ref_pending[r]) begin
        automatic logic all_closed = 1'b1;
        automatic logic ref_ok     = 1'b1;
        for (int b = r * BPR; b < (r + 1) * BPR; b++) begin
          if (bs[b].open || pim_busy[b]) all_closed = 1'b0;
          if (bs[b].act_wait != '0)      ref_ok     = 1'b0;
        end
        if (all_closed && ref_ok) begin
          cand_valid  = 1'b1;
          cand        = '0;
          cand.cmd    = C_REF;
          cand.bank   = BANK_W'(r * BPR);
          cand_is_col = 1'b0;
        end else begin
          for (int b = (r + 1) * int'(BPR) - 1; b >= r * int'(BPR); b--) begin
            if (bs[b].open && !pim_busy[b] && bs[b].pre_wait == '0) begin
              cand_valid  = 1'b1;
              cand        = '0;
              cand.cmd    = C_PRE;
              cand.bank   = BANK_W'(b);
              cand_is_col = 1'b0;
            end
          end
        end
      end
    end
  end

endmodule
