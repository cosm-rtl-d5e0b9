// cosm_top: one memory channel of the cooperative CPU/PIM system.
//
// Memory-controller side: the CPU request queue, refresh timer, FR-FCFS
// scheduler and bank-state tracker of a conventional controller, plus the
// PIM Execution Queue / PIM Read-Write Queue, the Idle Window Estimator, the
// PIM scheduler and the Command Arbiter.  The four-stage flow is: requests
// are queued by type; the IWE turns the queue into bank and bus idle
// windows; FR-FCFS and the PIM scheduler each propose a command; the arbiter
// picks one (pause > CPU/refresh > PIM) and drives it on the C/A bus, all in
// one cycle.
//
// Device side: one pim_bank per bank (PEE + 1 kB staging buffer), fed by the
// same C/A bus.  The DRAM arrays and the PIM compute units are not part of
// this RTL: each bank's array column port (arr_*) and PIM unit port (pu_*)
// are top-level ports, and the C/A bus (ca) is an output so that an array
// model can follow ACT/PRE/RD/WR.  CPU read/write data does not pass
// through this module; cpu_issue_* reports when a CPU request's column
// command goes out (its tag), which is when its data moves tCL later.
//
// Host ports: CPU requests (cpu_*), the PIM command stream (pim_*, with the
// burst of a PIM_WrBuf), and the bursts returned by PIM_RdBuf (rd_*),
// returned the cycle after the command.  ev_* pulse once per event for
// observation.
module cosm_top
  import cosm_pkg::*;
#(
  parameter int unsigned QDEPTH  = 16,
  parameter int unsigned PQDEPTH = 2,
  parameter int unsigned TREFI   = T_REFI,
  localparam int unsigned NB     = N_BANKS,
  localparam int unsigned NR     = N_RANKS,
  localparam int unsigned QI_W   = $clog2(QDEPTH)
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // CPU requests
  input  logic                  cpu_valid,
  output logic                  cpu_ready,
  input  cpu_req_t              cpu_req,
  output logic                  cpu_issue_valid,
  output logic [TAG_W-1:0]      cpu_issue_tag,
  // PIM command stream
  input  logic                  pim_valid,
  output logic                  pim_ready,
  input  pim_req_t              pim_req,
  input  logic [BURST_BITS-1:0] pim_data,
  output logic                  rd_valid,
  output logic [BURST_BITS-1:0] rd_data,
  // C/A bus
  output dram_cmd_t             ca,
  // DRAM array ports, one per bank
  output logic [NB-1:0]         arr_en,
  output logic [NB-1:0]         arr_we,
  output logic [COL_W-1:0]      arr_col   [NB],
  output logic [COL_BITS-1:0]   arr_wdata [NB],
  input  logic [COL_BITS-1:0]   arr_rdata [NB],
  // PIM unit ports, one per bank
  output logic [NB-1:0]         pu_valid,
  output logic [NB-1:0]         pu_st,
  output logic [COL_W-1:0]      pu_col    [NB],
  output logic [COL_BITS-1:0]   pu_ldata  [NB],
  input  logic [COL_BITS-1:0]   pu_sdata  [NB],
  // observation
  output logic                  ev_pause,
  output logic                  ev_resume,
  output logic                  ev_defer,
  output logic                  ev_barrier,
  output logic [NB-1:0]         ev_pim_done
);

  // ---------------- memory controller ----------------
  logic [QDEPTH-1:0] ent_valid;
  cpu_req_t          ent [QDEPTH];
  logic [NB-1:0]     head_valid, bank_pending;
  cpu_req_t          head [NB];
  logic              rm_valid;
  logic [QI_W-1:0]   rm_idx, cand_idx;
  logic [$clog2(QDEPTH+1)-1:0] qcount;

  mem_queue #(.QDEPTH(QDEPTH), .NB(NB)) u_mq (
    .clk, .rst_n,
    .in_valid(cpu_valid), .in_ready(cpu_ready), .in_req(cpu_req),
    .rm_valid, .rm_idx,
    .ent_valid, .ent, .head_valid, .head, .bank_pending, .count(qcount)
  );

  logic [NR-1:0] ref_pending, ref_done;
  refresh_ctrl #(.NR(NR), .TREFI(TREFI)) u_ref (
    .clk, .rst_n, .ref_done, .ref_pending
  );

  bank_state_t       bs [NB];
  logic [WAIT_W-1:0] rrd_wait [NR];
  logic [WAIT_W-1:0] bus_wait;
  logic [NB-1:0]     pim_busy, pim_st, pim_done, powner_prwq;
  pim_state_e        pstate [NB];
  dram_cmd_t         issue;

  bank_tracker #(.NB(NB), .NR(NR)) u_bt (
    .clk, .rst_n, .cmd(issue), .pim_busy, .pim_st, .bs, .rrd_wait, .bus_wait
  );

  logic [RANK_W-1:0] cur_rank;
  logic              cpu_cand_valid, cpu_cand_is_col;
  dram_cmd_t         cpu_cand;

  frfcfs_sched #(.QDEPTH(QDEPTH), .NB(NB), .NR(NR)) u_frfcfs (
    .ent_valid, .ent, .bs, .rrd_wait, .bus_wait, .pim_busy, .ref_pending, .cur_rank,
    .cand_valid(cpu_cand_valid), .cand(cpu_cand), .cand_is_col(cpu_cand_is_col), .cand_idx
  );

  logic [WIN_W-1:0] window_bank [NB];
  logic [WIN_W-1:0] window_bus;

  iwe #(.NB(NB), .NR(NR)) u_iwe (
    .head_valid, .head, .bs, .cur_rank, .bus_wait, .window_bank, .window_bus
  );

  logic [NB-1:0]         peq_valid, prwq_valid, peq_pop, prwq_pop;
  pim_req_t              peq_head [NB];
  pim_req_t              prwq_head [NB];
  logic [BURST_BITS-1:0] prwq_data [NB];
  logic                  all_idle;

  pim_cmd_queue #(.NB(NB), .DEPTH(PQDEPTH)) u_pq (
    .clk, .rst_n,
    .in_valid(pim_valid), .in_ready(pim_ready), .in_req(pim_req), .in_data(pim_data),
    .all_idle,
    .peq_valid, .peq_head, .peq_pop,
    .prwq_valid, .prwq_head, .prwq_data, .prwq_pop,
    .barrier_taken(ev_barrier)
  );

  logic      pim_cand_valid, pim_cand_is_xfer;
  dram_cmd_t pim_cand;

  pim_scheduler #(.NB(NB), .NR(NR)) u_psched (
    .peq_valid, .peq_head, .prwq_valid, .prwq_head, .bs, .rrd_wait, .bus_wait,
    .window_bank, .window_bus, .pstate, .powner_prwq, .ref_pending,
    .cand_valid(pim_cand_valid), .cand(pim_cand), .cand_is_xfer(pim_cand_is_xfer)
  );

  logic took_cpu, took_pim;
  logic [$clog2(N_COLS_PER_CMD+1)-1:0] pc_inf [NB];

  cmd_arbiter #(.NB(NB), .NR(NR)) u_arb (
    .clk, .rst_n,
    .cpu_valid(cpu_cand_valid), .cpu_cand, .pim_valid(pim_cand_valid), .pim_cand,
    .window_bank, .bank_pending, .ref_pending,
    .issue, .took_cpu, .took_pim, .cur_rank,
    .pstate, .powner_prwq, .pim_busy, .pim_st, .pim_done, .pc_inf,
    .ev_pause, .ev_defer, .ev_resume
  );

  // queue maintenance
  assign rm_valid        = took_cpu && cpu_cand_is_col;
  assign rm_idx          = cand_idx;
  assign cpu_issue_valid = rm_valid;
  assign cpu_issue_tag   = ent[cand_idx].tag;

  always_comb begin
    for (int r = 0; r < NR; r++)
      ref_done[r] = (issue.cmd == C_REF) && (rank_of(issue.bank) == RANK_W'(r));
    all_idle = 1'b1;
    for (int b = 0; b < NB; b++) begin
      peq_pop[b]  = pim_done[b] && !powner_prwq[b];
      prwq_pop[b] = (pim_done[b] && powner_prwq[b]) ||
                    (took_pim && pim_cand_is_xfer && issue.bank == BANK_W'(b));
      if (pstate[b] != PS_IDLE) all_idle = 1'b0;
    end
  end

  assign ca          = issue;
  assign ev_pim_done = pim_done;

  // ---------------- device side ----------------
  logic [NB-1:0]         bk_rvalid;
  logic [BURST_BITS-1:0] bk_rdata [NB];
  logic [NB-1:0]         pee_running, pee_done;
  wire  [BURST_BITS-1:0] dq_wdata = prwq_data[issue.bank];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    pim_bank #(.BANK_ID(b)) u_bank (
      .clk, .rst_n,
      .ca(issue),
      .dq_wdata,
      .dq_rvalid(bk_rvalid[b]), .dq_rdata(bk_rdata[b]),
      .arr_en(arr_en[b]), .arr_we(arr_we[b]), .arr_col(arr_col[b]),
      .arr_wdata(arr_wdata[b]), .arr_rdata(arr_rdata[b]),
      .pu_valid(pu_valid[b]), .pu_st(pu_st[b]), .pu_col(pu_col[b]),
      .pu_ldata(pu_ldata[b]), .pu_sdata(pu_sdata[b]),
      .pee_running(pee_running[b]), .pee_done(pee_done[b])
    );
  end

  always_comb begin
    rd_valid = |bk_rvalid;
    rd_data  = '0;
    for (int b = 0; b < NB; b++)
      if (bk_rvalid[b]) rd_data = bk_rdata[b];
  end

  // The controller's inferred PIM state must match the device without any
  // status signal.
  a_pee_in_sync: assert property (@(posedge clk) disable iff (!rst_n)
    (pee_running == pim_busy) && (pee_done == pim_done));

endmodule
