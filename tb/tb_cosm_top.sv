// tb_cosm_top: end-to-end test of one channel at the default configuration
// (2 ranks x 16 banks, nPTL = 128, tCCD = 2).
//
// Models around the design: a DRAM array per bank (rows opened and closed
// by ACT/PRE on the C/A bus, contents = a hash of the address until
// written) and a PIM unit per bank (returns a hash of the column for
// PIM_Exec(St), checks the data delivered for PIM_Exec(Ld)).
// A protocol monitor checks, independently of the design: every column
// access, CPU or PIM, hits an open row at least tRCD after its ACT; no CPU
// column command reaches a bank whose PEE issues columns; every PIM command
// visits each of its 64 columns exactly once across pauses and resumptions.
// Phases:
//  A  PIM_Exec(Ld) alone: the command must take exactly nPTL cycles.
//  B  decoupled write then read: 32 PIM_WrBuf + PIM_StBuf, barrier,
//     PIM_LdBuf + 32 PIM_RdBuf; the bank row and the returned bursts must
//     match the written data.
//  C  random CPU traffic concurrent with PIM_Exec(Ld/St) on many banks and a
//     second decoupled transfer; every CPU request must be issued, every PIM
//     command must finish, stored results must be in the array.
// Each mechanism (pause, resume, deferred ACT, barrier, refresh, the four
// transfer commands, both execution kinds) is counted and must occur.
module tb_cosm_top;
  import cosm_pkg::*;

  localparam int unsigned NB = N_BANKS;
  localparam int unsigned NCOL = N_COLS_PER_CMD;

  // loop bounds held in variables so the loops stay loops in the simulator
  int n_banks = NB, n_words = BUF_WORDS, n_slots = BUF_SLOTS, n_cols = NCOL;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;   // inputs change at the falling edge

  logic                  cpu_valid, cpu_ready, cpu_issue_valid;
  cpu_req_t              cpu_req;
  logic [TAG_W-1:0]      cpu_issue_tag;
  logic                  pim_valid, pim_ready, rd_valid;
  pim_req_t              pim_req;
  logic [BURST_BITS-1:0] pim_data, rd_data;
  dram_cmd_t             ca;
  logic [NB-1:0]         arr_en, arr_we, pu_valid, pu_st, ev_pim_done;
  logic [COL_W-1:0]      arr_col [NB];
  logic [COL_W-1:0]      pu_col [NB];
  logic [COL_BITS-1:0]   arr_wdata [NB], arr_rdata [NB], pu_ldata [NB], pu_sdata [NB];
  logic                  ev_pause, ev_resume, ev_defer, ev_barrier;

  cosm_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ------------------------------------------------------------ DRAM model
  function automatic logic [COL_BITS-1:0] init_val(int b, int r, int c);
    return {4{32'(b * 32'h9E3779B1 ^ r * 32'h85EBCA77 ^ c * 32'hC2B2AE3D ^ 32'h1234567)}};
  endfunction
  function automatic logic [COL_BITS-1:0] st_val(int b, int c);
    return {4{32'(b * 32'h27D4EB2F + c * 32'h165667B1 + 32'h5A5A)}};
  endfunction

  logic [COL_BITS-1:0] mem [int];
  logic                open_q [NB];
  int                  row_q [NB];
  longint              act_t [NB];
  longint              cyc = 0;

  function automatic int key(int b, int r, int c);
    return (b << 24) | (r << 8) | c;
  endfunction
  function automatic logic [COL_BITS-1:0] rd_mem(int b, int r, int c);
    int k = key(b, r, c);
    return mem.exists(k) ? mem[k] : init_val(b, r, c);
  endfunction

  for (genvar b = 0; b < NB; b++) begin : g_model
    assign arr_rdata[b] = rd_mem(b, row_q[b], int'(arr_col[b]));
    assign pu_sdata[b]  = st_val(b, int'(pu_col[b]));
  end

  // ------------------------------------------------------------ monitor
  int  n_pause = 0, n_resume = 0, n_defer = 0, n_barrier = 0, n_ref = 0;
  int  n_wrbuf = 0, n_rdbuf = 0, n_ldbuf = 0, n_stbuf = 0, n_exld = 0, n_exst = 0;
  int  n_cpu_issued = 0, n_pim_done = 0;
  logic [127:0] seen [NB];
  int  ncols [NB];
  int  start_col [NB];
  longint exec_t0 [NB];
  longint last_done_len [NB];

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ev_pause)   n_pause++;
    if (ev_resume)  n_resume++;
    if (ev_defer)   n_defer++;
    if (ev_barrier) n_barrier++;
    if (cpu_issue_valid) n_cpu_issued++;
    unique case (ca.cmd)
      C_ACT: begin
        check(!open_q[ca.bank], "ACT to an open bank");
        open_q[ca.bank] <= 1'b1; row_q[ca.bank] <= int'(ca.row); act_t[ca.bank] <= cyc;
      end
      C_PRE: begin
        open_q[ca.bank] <= 1'b0;
      end
      C_REF: begin
        n_ref++;
        for (int b = 0; b < n_banks; b++)
          if (rank_of(BANK_W'(b)) == rank_of(ca.bank)) check(!open_q[b], "REF with an open bank");
      end
      C_RD, C_WR: begin
        check(open_q[ca.bank] && row_q[ca.bank] == int'(ca.row), "CPU column to a wrong/closed row");
        check(cyc - act_t[ca.bank] >= T_RCD, "CPU column before tRCD");
        check(!arr_en[ca.bank], "CPU column while the PEE accesses the bank");
        if (ca.cmd == C_WR) mem[key(ca.bank, int'(ca.row), int'(ca.col))] = '0;
      end
      C_PIM_EXEC, C_PIM_LDBUF, C_PIM_STBUF: begin
        check(open_q[ca.bank], "PIM command to a closed bank");
        check(cyc - act_t[ca.bank] >= T_RCD, "PIM command before tRCD");
        if (ca.cmd == C_PIM_EXEC && !ca.st) n_exld++;
        if (ca.cmd == C_PIM_EXEC &&  ca.st) n_exst++;
        if (ca.cmd == C_PIM_LDBUF) n_ldbuf++;
        if (ca.cmd == C_PIM_STBUF) n_stbuf++;
        if (!ev_resume) begin
          exec_t0[ca.bank] <= cyc;
          ncols[ca.bank] <= 0;
          start_col[ca.bank] <= int'(ca.col);
          seen[ca.bank] <= '0;
        end
      end
      C_PIM_RDBUF: n_rdbuf++;
      C_PIM_WRBUF: n_wrbuf++;
      default: ;
    endcase
    for (int b = 0; b < n_banks; b++) begin
      if (arr_en[b]) begin
        check(open_q[b], "PEE column on a closed bank");
        check(!seen[b][arr_col[b]], "PEE column visited twice");
        seen[b][arr_col[b]] <= 1'b1;
        ncols[b] <= ncols[b] + 1;
        if (arr_we[b]) mem[key(b, row_q[b], int'(arr_col[b]))] = arr_wdata[b];
      end
      if (pu_valid[b] && !pu_st[b])
        check(pu_ldata[b] == rd_mem(b, row_q[b], int'(pu_col[b])), "PIM unit got wrong bank data");
      if (ev_pim_done[b]) begin
        n_pim_done++;
        // the column of this cycle is counted by the non-blocking update above
        check(ncols[b] + (arr_en[b] ? 1 : 0) == NCOL, $sformatf("bank %0d: %0d columns, not %0d", b,
              ncols[b] + (arr_en[b] ? 1 : 0), NCOL));
        last_done_len[b] <= cyc - exec_t0[b];
      end
    end
  end

  // ------------------------------------------------------------ drivers
  task automatic pim_send(input pim_op_e op, input int b, input int row, input int col,
                          input logic [BURST_BITS-1:0] d = '0);
    @(negedge clk);
    pim_req.op = op; pim_req.bank = BANK_W'(b); pim_req.row = ROW_W'(row);
    pim_req.col = COL_W'(col); pim_data = d; pim_valid = 1'b1;
    #1;
    while (!pim_ready) begin @(negedge clk); #1; end
    @(posedge clk);   // taken at this edge
    #1 pim_valid = 1'b0;
  endtask

  function automatic logic [BURST_BITS-1:0] burst(int seed, int i);
    return {8{32'(seed * 32'h01000193 + i * 32'h7FEB352D)}};
  endfunction

  logic [BURST_BITS-1:0] rd_got [$];
  always @(posedge clk) if (rd_valid) rd_got.push_back(rd_data);

  int  cpu_sent = 0;
  bit  cpu_on = 0;
  int  cpu_rate = 40;   // percent of cycles with a new request
  initial begin
    cpu_valid = 0; cpu_req = '0;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (cpu_on && ($urandom % 100) < cpu_rate) begin
        cpu_req.we   = 1'b0;
        cpu_req.bank = BANK_W'($urandom % NB);
        cpu_req.row  = ROW_W'(100 + $urandom % 4);
        cpu_req.col  = COL_W'($urandom % 128);
        cpu_req.tag  = TAG_W'(cpu_sent);
        cpu_valid    = 1'b1;
        #1;
        while (!cpu_ready) begin @(negedge clk); #1; end
        @(posedge clk);   // taken at this edge
        cpu_sent++;
        #1 cpu_valid = 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    int base;
    pim_valid = 0; pim_req = '0; pim_data = '0;
    for (int b = 0; b < n_banks; b++) begin open_q[b] = 0; row_q[b] = 0; act_t[b] = 0; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- A: one PIM_Exec(Ld) alone takes nPTL cycles
    pim_send(P_EXEC_LD, 0, 5, 0);
    wait (ev_pim_done[0]); @(posedge clk); @(posedge clk);
    check(last_done_len[0] == N_PTL, $sformatf("Exec alone took %0d cycles, expected %0d",
          last_done_len[0], N_PTL));

    // ---- B: decoupled write, barrier, decoupled read back
    for (int i = 0; i < n_slots; i++) pim_send(P_WRBUF, 1, 0, 0, burst(1, i));
    pim_send(P_STBUF, 1, 7, 0);
    pim_send(P_BARRIER, 0, 0, 0);
    for (int c = 0; c < n_words; c++) begin
      logic [BURST_BITS-1:0] w;
      w = burst(1, c / 2);
      check(rd_mem(1, 7, c) == (c % 2 ? w[255:128] : w[127:0]), $sformatf("StBuf column %0d", c));
    end
    pim_send(P_LDBUF, 1, 7, 0);
    for (int i = 0; i < n_slots; i++) pim_send(P_RDBUF, 1, 0, 0);
    pim_send(P_BARRIER, 0, 0, 0);
    repeat (4) @(posedge clk);
    check(rd_got.size() == BUF_SLOTS, $sformatf("%0d bursts read back", rd_got.size()));
    for (int i = 0; i < n_slots && i < rd_got.size(); i++)
      check(rd_got[i] == burst(1, i), $sformatf("RdBuf burst %0d", i));
    rd_got.delete();

    // ---- C: concurrent CPU traffic and PIM work
    cpu_on = 1;
    for (int round = 0; round < 6; round++) begin
      for (int b = 0; b < n_banks; b++)
        pim_send((b + round) % 3 == 0 ? P_EXEC_ST : P_EXEC_LD, b, 20 + round, (b % 2) * 64);
      // an overlapped decoupled transfer on bank 2 and 3
      base = 10 + round;
      for (int i = 0; i < n_slots; i++) pim_send(P_WRBUF, 2 + round % 2, 0, 0, burst(base, i));
      pim_send(P_STBUF, 2 + round % 2, 200 + round, 0);
      pim_send(P_BARRIER, 0, 0, 0);
      for (int c = 0; c < n_words; c++) begin
        logic [BURST_BITS-1:0] w;
        w = burst(base, c / 2);
        check(rd_mem(2 + round % 2, 200 + round, c) == (c % 2 ? w[255:128] : w[127:0]),
              $sformatf("round %0d StBuf column %0d", round, c));
      end
      for (int b = 0; b < n_banks; b++)
        if ((b + round) % 3 == 0)
          for (int c = 0; c < n_cols; c++)
            check(rd_mem(b, 20 + round, (b % 2) * 64 + c) == st_val(b, (b % 2) * 64 + c),
                  $sformatf("round %0d bank %0d Exec(St) column %0d", round, b, c));
      // read the transfer back while CPU traffic continues
      pim_send(P_LDBUF, 2 + round % 2, 200 + round, 0);
      for (int i = 0; i < n_slots; i++) pim_send(P_RDBUF, 2 + round % 2, 0, 0);
      pim_send(P_BARRIER, 0, 0, 0);
      repeat (4) @(posedge clk);
      check(rd_got.size() == BUF_SLOTS, $sformatf("round %0d: %0d bursts read back", round, rd_got.size()));
      for (int i = 0; i < n_slots && i < rd_got.size(); i++)
        check(rd_got[i] == burst(base, i), $sformatf("round %0d RdBuf burst %0d", round, i));
      rd_got.delete();
    end
    cpu_on = 0;
    @(posedge clk);
    repeat (400) @(posedge clk);
    check(n_cpu_issued == cpu_sent, $sformatf("CPU requests issued %0d of %0d", n_cpu_issued, cpu_sent));

    $display("events: pause=%0d resume=%0d defer=%0d barrier=%0d ref=%0d wrbuf=%0d rdbuf=%0d ldbuf=%0d stbuf=%0d exec_ld=%0d exec_st=%0d pim_done=%0d cpu=%0d cycles=%0d",
             n_pause, n_resume, n_defer, n_barrier, n_ref, n_wrbuf, n_rdbuf, n_ldbuf, n_stbuf,
             n_exld, n_exst, n_pim_done, n_cpu_issued, cyc);
    check(n_pause > 0,   "no PIM_Pause happened");
    check(n_resume > 0,  "no resumption happened");
    check(n_defer > 0,   "no ACT was deferred");
    check(n_barrier > 0, "no barrier happened");
    check(n_ref > 0,     "no refresh happened");
    check(n_wrbuf > 0 && n_rdbuf > 0 && n_ldbuf > 0 && n_stbuf > 0, "a transfer command never happened");
    check(n_exld > 0 && n_exst > 0, "an execution kind never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
