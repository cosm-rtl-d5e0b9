// cmd_arbiter: the Command Arbiter, last stage of the controller.
//
// Each cycle it puts at most one command on the C/A bus, by strict priority:
//  1. PIM_Pause, when a bank running a PIM command must be freed: a refresh is
//     due in its rank, or a CPU request waits for it and the IWE window has
//     shrunk to the time the bank needs to hand over (finish the column,
//     the PRE delay of Table 1, tRP + tRCD, one command slot).  The pause is
//     thus sent at the last cycle that still keeps the CPU access on time.
//     It is never sent earlier than tCCD after the PIM command.
//  2. The FR-FCFS candidate (CPU access or refresh).  A CPU ACT is deferred
//     when the PIM scheduler offers a command for the same bank: the PIM
//     scheduler only does that when the bank window fits a PIM operation, so
//     the bank works on PIM until the ACT is really needed.
//  3. The PIM candidate.
// For every bank it keeps the arbiter side of the PEE (Fig. 5): StartAt, the
// cycle the command or its resumption was issued, and the number of columns
// completed before it.  The PIM Counter is inferred, with no signal from the
// device, as PC_inf = pc_base + (now - StartAt - 1) / tCCD; from it the
// arbiter knows when the command ends (done, which pops its queue) and, after
// a pause, how many columns remain.  The same timing convention as the PEE is
// used: columns in cycles StartAt+1+k*tCCD, a pause in cycle p lets the column
// in progress finish.  Priorities and the inference rule are the paper's; the
// hand-over lead time formula is this design's.
module cmd_arbiter
  import cosm_pkg::*;
#(
  parameter int unsigned NB   = N_BANKS,
  parameter int unsigned NR   = N_RANKS,
  parameter int unsigned TCCD = T_CCD,
  parameter int unsigned NPTL = N_PTL,
  localparam int unsigned NCOL = NPTL / TCCD,
  localparam int unsigned PC_W = $clog2(NCOL + 1)
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cpu_valid,
  input  dram_cmd_t         cpu_cand,
  input  logic              pim_valid,
  input  dram_cmd_t         pim_cand,
  input  logic [WIN_W-1:0]  window_bank [NB],
  input  logic [NB-1:0]     bank_pending,
  input  logic [NR-1:0]     ref_pending,
  output dram_cmd_t         issue,
  output logic              took_cpu,
  output logic              took_pim,
  output logic [RANK_W-1:0] cur_rank,
  output pim_state_e        pstate [NB],
  output logic [NB-1:0]     powner_prwq,
  output logic [NB-1:0]     pim_busy,
  output logic [NB-1:0]     pim_st,
  output logic [NB-1:0]     pim_done,
  output logic [PC_W-1:0]   pc_inf [NB],
  output logic              ev_pause,
  output logic              ev_defer,
  output logic              ev_resume
);

  localparam int unsigned BPR = NB / NR;

  logic [CYC_W-1:0] now;
  logic [CYC_W-1:0] start_at [NB];
  logic [PC_W-1:0]  pc_base  [NB];

  logic [NB-1:0]    col_end, last_col, need_pause;
  logic [PC_W-1:0]  col_cur [NB];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      automatic logic [CYC_W-1:0] el = now - start_at[b];
      automatic int unsigned lead = TCCD + pim_pre_delay(pim_st[b]) + T_RP + T_RCD + 1;
      col_cur[b]  = (el == '0) ? pc_base[b] : pc_base[b] + PC_W'((el - 1'b1) / CYC_W'(TCCD));
      col_end[b]  = (el != '0) && ((el % CYC_W'(TCCD)) == '0);
      last_col[b] = (col_cur[b] == PC_W'(NCOL - 1));
      pim_busy[b] = (pstate[b] == PS_RUN) || (pstate[b] == PS_PAUSING);
      pim_done[b] = pim_busy[b] && col_end[b] && last_col[b];
      pc_inf[b]   = pim_busy[b] ? col_cur[b] : pc_base[b];
      need_pause[b] = (pstate[b] == PS_RUN) && (el >= CYC_W'(TCCD)) && !(col_end[b] && last_col[b]) &&
                      (ref_pending[b / BPR] ||
                       (bank_pending[b] && int'(window_bank[b]) <= int'(lead)));
    end
  end

  logic defer;
  always_comb begin
    issue     = '0;
    issue.cmd = C_NOP;
    took_cpu  = 1'b0;
    took_pim  = 1'b0;
    ev_pause  = 1'b0;
    defer     = cpu_valid && pim_valid && cpu_cand.cmd == C_ACT && pim_cand.bank == cpu_cand.bank;
    for (int b = NB - 1; b >= 0; b--) begin
      if (need_pause[b]) begin
        ev_pause   = 1'b1;
        issue      = '0;
        issue.cmd  = C_PIM_PAUSE;
        issue.bank = BANK_W'(b);
      end
    end
    if (!ev_pause) begin
      if (cpu_valid && !defer) begin
        issue    = cpu_cand;
        took_cpu = 1'b1;
      end else if (pim_valid) begin
        issue    = pim_cand;
        took_pim = 1'b1;
      end
    end
  end

  wire issue_is_pim_op = (issue.cmd == C_PIM_EXEC) || (issue.cmd == C_PIM_LDBUF) ||
                         (issue.cmd == C_PIM_STBUF);
  assign ev_defer  = defer && !ev_pause;
  assign ev_resume = issue_is_pim_op && (pstate[issue.bank] == PS_PAUSED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now         <= '0;
      cur_rank    <= '0;
      powner_prwq <= '0;
      pim_st      <= '0;
      for (int b = 0; b < NB; b++) begin
        pstate[b]   <= PS_IDLE;
        start_at[b] <= '0;
        pc_base[b]  <= '0;
      end
    end else begin
      now <= now + 1'b1;
      if (issue.cmd != C_NOP) cur_rank <= rank_of(issue.bank);
      for (int b = 0; b < NB; b++) begin
        automatic logic here = (issue.bank == BANK_W'(b));
        unique case (pstate[b])
          PS_IDLE, PS_PAUSED: begin
            if (here && issue_is_pim_op) begin
              pstate[b]   <= PS_RUN;
              start_at[b] <= now;
              if (pstate[b] == PS_IDLE) begin
                pc_base[b]     <= '0;
                pim_st[b]      <= issue.st || (issue.cmd == C_PIM_STBUF);
                powner_prwq[b] <= (issue.cmd != C_PIM_EXEC);
              end
            end
          end
          PS_RUN, PS_PAUSING: begin
            if (col_end[b] && last_col[b]) begin
              pstate[b]  <= PS_IDLE;
              pc_base[b] <= '0;
            end else if (col_end[b] && (pstate[b] == PS_PAUSING ||
                                        (here && issue.cmd == C_PIM_PAUSE))) begin
              pstate[b]  <= PS_PAUSED;
              pc_base[b] <= col_cur[b] + 1'b1;
            end else if (here && issue.cmd == C_PIM_PAUSE) begin
              pstate[b]  <= PS_PAUSING;
            end
          end
          default: ;
        endcase
      end
    end
  end

  a_pause_only_running: assert property (@(posedge clk) disable iff (!rst_n)
    (issue.cmd == C_PIM_PAUSE) |-> (pstate[issue.bank] == PS_RUN));

endmodule
