// tb_pim_cmd_queue: self-checking test of the PEQ/PRWQ queues and the
// PIM_Barrier rule.
//
// Reference FIFOs per bank follow random pushes of PIM_Exec and transfer
// commands (with their write data) to 4 banks and random pops of non-empty
// heads.  Every cycle the head, data and valid of every queue and in_ready
// are compared.  A barrier is offered from time to time: it must be taken
// exactly when every queue is empty and all_idle is set.  Default sizes
// (32 banks, 2 entries per queue).
module tb_pim_cmd_queue;
  import cosm_pkg::*;

  localparam int unsigned NB = N_BANKS;
  localparam int unsigned D  = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  in_valid = 0, in_ready, all_idle = 1, barrier_taken;
  pim_req_t              in_req = '0;
  logic [BURST_BITS-1:0] in_data = '0;
  logic [NB-1:0]         peq_valid, prwq_valid, peq_pop = '0, prwq_pop = '0;
  pim_req_t              peq_head [NB];
  pim_req_t              prwq_head [NB];
  logic [BURST_BITS-1:0] prwq_data [NB];

  pim_cmd_queue dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  pim_req_t              m_pe [NB][$];
  pim_req_t              m_pr [NB][$];
  logic [BURST_BITS-1:0] m_pd [NB][$];
  int n_b = NB, n_barriers = 0;

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      automatic bit empty = 1;
      automatic bit exec;
      @(negedge clk);
      for (int b = 0; b < n_b; b++) begin
        check(peq_valid[b] == (m_pe[b].size() > 0), "peq_valid");
        check(prwq_valid[b] == (m_pr[b].size() > 0), "prwq_valid");
        if (m_pe[b].size() > 0) check(peq_head[b] == m_pe[b][0], $sformatf("PEQ head bank %0d", b));
        if (m_pr[b].size() > 0) check(prwq_head[b] == m_pr[b][0] && prwq_data[b] == m_pd[b][0],
                                      $sformatf("PRWQ head bank %0d", b));
        if (m_pe[b].size() > 0 || m_pr[b].size() > 0) empty = 0;
      end
      // stimulus
      peq_pop = '0; prwq_pop = '0;
      for (int b = 0; b < 4; b++) begin
        if (m_pe[b].size() > 0 && $urandom % 100 < 30) peq_pop[b] = 1;
        if (m_pr[b].size() > 0 && $urandom % 100 < 30) prwq_pop[b] = 1;
      end
      all_idle = ($urandom % 100) < 70;
      in_valid = ($urandom % 100) < 70;
      in_req.op   = pim_op_e'($urandom % 7);
      in_req.bank = BANK_W'($urandom % 4);
      in_req.row  = ROW_W'($urandom);
      in_req.col  = COL_W'($urandom);
      in_data     = {8{$urandom}};
      exec = (in_req.op == P_EXEC_LD || in_req.op == P_EXEC_ST);
      #1;
      if (in_req.op == P_BARRIER)
        check(in_ready == (empty && all_idle), "barrier acceptance");
      else if (exec)
        check(in_ready == (m_pe[in_req.bank].size() < D || peq_pop[in_req.bank]), "PEQ in_ready");
      else
        check(in_ready == (m_pr[in_req.bank].size() < D || prwq_pop[in_req.bank]), "PRWQ in_ready");
      check(barrier_taken == (in_valid && in_ready && in_req.op == P_BARRIER), "barrier_taken");
      if (barrier_taken) n_barriers++;
      for (int b = 0; b < 4; b++) begin
        if (peq_pop[b])  void'(m_pe[b].pop_front());
        if (prwq_pop[b]) begin void'(m_pr[b].pop_front()); void'(m_pd[b].pop_front()); end
      end
      if (in_valid && in_ready && in_req.op != P_BARRIER) begin
        if (exec) m_pe[in_req.bank].push_back(in_req);
        else begin m_pr[in_req.bank].push_back(in_req); m_pd[in_req.bank].push_back(in_data); end
      end
    end
    check(n_barriers > 0, "no barrier was ever taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
