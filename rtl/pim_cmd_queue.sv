// pim_cmd_queue: the PIM Execution Queue (PEQ) and the PIM Read/Write Queue
// (PRWQ) of every bank, with the PIM_Barrier rule.
//
// One host port (in_valid/in_ready, in_req, in_data) carries the PIM command
// stream.  PIM_Exec(Ld/St) goes to the target bank's PEQ; PIM_WrBuf,
// PIM_RdBuf, PIM_LdBuf and PIM_StBuf go to its PRWQ; both are FIFOs of DEPTH
// entries per bank, so PRWQ commands of a bank keep their arrival order.  A
// PIM_Barrier is taken only when every queue is empty and no bank has a PIM
// command in progress (all_idle), so everything of one overlapped phase
// completes before any command of the next phase enters.  in_data is the
// burst of a PIM_WrBuf and is stored with it.
// The scheduler reads each queue head; a head leaves with *_pop (a PIM_RdBuf/
// PIM_WrBuf when issued, a PIM_Exec/LdBuf/StBuf when its last column is done).
// Queue names and the per-bank depth of 2 are the paper's; the single host
// port and the barrier-by-drain rule are this design's reading.
module pim_cmd_queue
  import cosm_pkg::*;
#(
  parameter int unsigned NB    = N_BANKS,
  parameter int unsigned DEPTH = 2
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  pim_req_t              in_req,
  input  logic [BURST_BITS-1:0] in_data,
  input  logic                  all_idle,
  output logic [NB-1:0]         peq_valid,
  output pim_req_t              peq_head [NB],
  input  logic [NB-1:0]         peq_pop,
  output logic [NB-1:0]         prwq_valid,
  output pim_req_t              prwq_head [NB],
  output logic [BURST_BITS-1:0] prwq_data [NB],
  input  logic [NB-1:0]         prwq_pop,
  output logic                  barrier_taken
);

  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pim_req_t              peq  [NB][DEPTH];
  pim_req_t              prwq [NB][DEPTH];
  logic [BURST_BITS-1:0] prwd [NB][DEPTH];
  logic [CW-1:0]         peq_cnt [NB];
  logic [CW-1:0]         prwq_cnt [NB];

  wire is_exec    = (in_req.op == P_EXEC_LD) || (in_req.op == P_EXEC_ST);
  wire is_barrier = (in_req.op == P_BARRIER);

  logic all_empty;
  always_comb begin
    all_empty = 1'b1;
    for (int b = 0; b < NB; b++)
      if (peq_cnt[b] != '0 || prwq_cnt[b] != '0) all_empty = 1'b0;
  end

  always_comb begin
    if (is_barrier)   in_ready = all_empty && all_idle;
    else if (is_exec) in_ready = (peq_cnt[in_req.bank]  < CW'(DEPTH)) || peq_pop[in_req.bank];
    else              in_ready = (prwq_cnt[in_req.bank] < CW'(DEPTH)) || prwq_pop[in_req.bank];
  end
  assign barrier_taken = in_valid && in_ready && is_barrier;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin
        peq_cnt[b]  <= '0;
        prwq_cnt[b] <= '0;
        for (int d = 0; d < DEPTH; d++) begin
          peq[b][d]  <= '0;
          prwq[b][d] <= '0;
          prwd[b][d] <= '0;
        end
      end
    end else begin
      for (int b = 0; b < NB; b++) begin
        automatic logic push_e = in_valid && in_ready && is_exec && (in_req.bank == BANK_W'(b));
        automatic logic push_t = in_valid && in_ready && !is_exec && !is_barrier &&
                                 (in_req.bank == BANK_W'(b));
        // PEQ
        if (peq_pop[b]) begin
          for (int d = 0; d < DEPTH - 1; d++) peq[b][d] <= peq[b][d+1];
          if (push_e) peq[b][IW'(peq_cnt[b] - 1'b1)] <= in_req;
          else        peq_cnt[b] <= peq_cnt[b] - 1'b1;
        end else if (push_e) begin
          peq[b][IW'(peq_cnt[b])] <= in_req;
          peq_cnt[b] <= peq_cnt[b] + 1'b1;
        end
        // PRWQ
        if (prwq_pop[b]) begin
          for (int d = 0; d < DEPTH - 1; d++) begin
            prwq[b][d] <= prwq[b][d+1];
            prwd[b][d] <= prwd[b][d+1];
          end
          if (push_t) begin
            prwq[b][IW'(prwq_cnt[b] - 1'b1)] <= in_req;
            prwd[b][IW'(prwq_cnt[b] - 1'b1)] <= in_data;
          end else begin
            prwq_cnt[b] <= prwq_cnt[b] - 1'b1;
          end
        end else if (push_t) begin
          prwq[b][IW'(prwq_cnt[b])] <= in_req;
          prwd[b][IW'(prwq_cnt[b])] <= in_data;
          prwq_cnt[b] <= prwq_cnt[b] + 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      peq_valid[b]  = (peq_cnt[b] != '0);
      peq_head[b]   = peq[b][0];
      prwq_valid[b] = (prwq_cnt[b] != '0);
      prwq_head[b]  = prwq[b][0];
      prwq_data[b]  = prwd[b][0];
    end
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    ((peq_pop & ~peq_valid) == '0) && ((prwq_pop & ~prwq_valid) == '0));

endmodule
