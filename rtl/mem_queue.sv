// mem_queue: the CPU memory request queue of the controller.
//
// Requests are kept in arrival order: entry 0 is the oldest.  A new request
// is appended (in_valid/in_ready); the scheduler removes any one entry per
// cycle (rm_valid/rm_idx) and the younger entries shift down, so an entry's
// index is always its age rank.  The whole queue is visible to the FR-FCFS
// scheduler.  For the Idle Window Estimator it also reports, per bank, the
// earliest-arriving pending request (head_*) and whether any request waits
// for each bank.  The paper names the queue only; its depth (QDEPTH) and the
// shifting organisation are this design's choices.
module mem_queue
  import cosm_pkg::*;
#(
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned NB     = N_BANKS,
  localparam int unsigned QI_W  = $clog2(QDEPTH),
  localparam int unsigned QC_W  = $clog2(QDEPTH + 1)
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  cpu_req_t         in_req,
  input  logic             rm_valid,
  input  logic [QI_W-1:0]  rm_idx,
  output logic [QDEPTH-1:0] ent_valid,
  output cpu_req_t         ent [QDEPTH],
  output logic [NB-1:0]    head_valid,
  output cpu_req_t         head [NB],
  output logic [NB-1:0]    bank_pending,
  output logic [QC_W-1:0]  count
);

  cpu_req_t  q [QDEPTH];
  logic [QC_W-1:0] cnt;

  assign in_ready = (cnt < QC_W'(QDEPTH)) || rm_valid;
  wire push = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < QDEPTH; i++) q[i] <= '0;
    end else begin
      if (rm_valid) begin
        for (int i = 0; i < QDEPTH - 1; i++)
          if (i >= int'(rm_idx)) q[i] <= q[i+1];
        if (push) q[QI_W'(cnt - 1'b1)] <= in_req;
        if (!push) cnt <= cnt - 1'b1;
      end else if (push) begin
        q[cnt[QI_W-1:0]] <= in_req;
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < QDEPTH; i++) begin
      ent_valid[i] = (QC_W'(i) < cnt);
      ent[i]       = q[i];
    end
    head_valid   = '0;
    bank_pending = '0;
    for (int b = 0; b < NB; b++) head[b] = '0;
    for (int i = QDEPTH - 1; i >= 0; i--) begin
      if (ent_valid[i]) begin
        head_valid[q[i].bank] = 1'b1;
        head[q[i].bank]       = q[i];
      end
    end
    bank_pending = head_valid;
  end

  assign count = cnt;

  a_rm_valid_entry: assert property (@(posedge clk) disable iff (!rst_n)
    rm_valid |-> (QC_W'(rm_idx) < cnt));

endmodule
