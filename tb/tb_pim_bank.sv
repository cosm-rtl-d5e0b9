// tb_pim_bank: self-checking test of one PIM-enabled bank (command decode,
// PIM Execution Engine, staging buffer and the column routing).
//
// The bench plays the DRAM array (a column array with a random initial
// content) and the PIM unit (a store value computed from the column), and
// puts commands on the C/A bus.  Checks:
//  - PIM_WrBuf bursts land in consecutive buffer slots, PIM_StBuf writes the
//    64 buffer words to the array columns, one per tCCD, ending nPTL cycles
//    after the command;
//  - PIM_Exec(Ld) hands each array column to the PIM unit, PIM_Exec(St)
//    writes the unit's result to the array;
//  - PIM_LdBuf copies array columns into the buffer and PIM_RdBuf returns
//    them one cycle after the command, low column in the low half;
//  - PIM_Pause freezes the engine and reissuing the command resumes it, so
//    every column is written once;
//  - commands for another bank are ignored.
module tb_pim_bank;
  import cosm_pkg::*;

  localparam int unsigned NCOL = N_PTL / T_CCD;
  localparam int unsigned NC = 1 << COL_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dram_cmd_t             ca = '0;
  logic [BURST_BITS-1:0] dq_wdata = '0, dq_rdata;
  logic                  dq_rvalid, arr_en, arr_we, pu_valid, pu_st, pee_running, pee_done;
  logic [COL_W-1:0]      arr_col, pu_col;
  logic [COL_BITS-1:0]   arr_wdata, arr_rdata, pu_ldata, pu_sdata;

  pim_bank #(.BANK_ID(5)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // array and PIM unit models
  logic [COL_BITS-1:0] arr [NC];
  int                  nwr [NC];
  int                  n_c = NC, n_slots = BUF_SLOTS;
  function automatic logic [COL_BITS-1:0] st_val(int c);
    return {4{32'(c * 32'h9E3779B1 + 32'h77)}};
  endfunction
  assign arr_rdata = arr[arr_col];
  assign pu_sdata  = st_val(int'(pu_col));

  longint cyc = 0, t_done = 0;
  int     n_done = 0, n_en = 0, n_pu = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (arr_en) begin
      n_en++;
      if (arr_we) begin arr[arr_col] = arr_wdata; nwr[arr_col]++; end
    end
    if (pu_valid) begin
      n_pu++;
      check(pu_col == arr_col && arr_en, "PIM unit column not the array column");
      if (!pu_st) check(pu_ldata == arr[arr_col], "PIM unit got wrong data");
      else        check(arr_we && arr_wdata == pu_sdata, "array not written with the unit result");
    end
    if (pee_done) begin t_done = cyc; n_done++; end
  end

  task automatic send(input dram_cmd_e c, input int col = 0, input logic st = 0, input int bank = 5);
    @(negedge clk);
    ca = '0; ca.cmd = c; ca.bank = BANK_W'(bank); ca.col = COL_W'(col); ca.st = st;
    @(negedge clk);
    ca = '0; ca.cmd = C_NOP;
  endtask

  task automatic run_cmd(input dram_cmd_e c, input int col, input logic st);
    int d0 = n_done;
    longint t0;
    send(c, col, st);
    t0 = cyc;
    wait (n_done == d0 + 1); @(negedge clk);
    check(t_done - t0 == N_PTL, $sformatf("%s took %0d cycles, expected %0d", c.name(), t_done - t0, N_PTL));
  endtask

  logic [BURST_BITS-1:0] wb [BUF_SLOTS];
  int d1;

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int c = 0; c < n_c; c++) begin arr[c] = {$urandom, $urandom, $urandom, $urandom}; nwr[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // WrBuf x32, StBuf to columns 0..63
    for (int i = 0; i < n_slots; i++) begin
      wb[i] = {8{$urandom}};
      @(negedge clk); dq_wdata = wb[i]; ca = '0; ca.cmd = C_PIM_WRBUF; ca.bank = 5;
    end
    @(negedge clk); ca = '0; ca.cmd = C_NOP;
    run_cmd(C_PIM_STBUF, 0, 1);
    for (int c = 0; c < NCOL; c++)
      check(arr[c] == (c % 2 ? wb[c / 2][255:128] : wb[c / 2][127:0]), $sformatf("StBuf column %0d", c));
    // a command for another bank does nothing
    send(C_PIM_EXEC, 0, 0, 6);
    repeat (10) @(negedge clk);
    check(!pee_running && !arr_en, "command of another bank executed");
    // Exec(Ld) on columns 64..127, Exec(St) on 0..63
    n_pu = 0;
    run_cmd(C_PIM_EXEC, 64, 0);
    check(n_pu == NCOL, $sformatf("%0d PIM unit loads", n_pu));
    for (int c = 0; c < n_c; c++) nwr[c] = 0;
    run_cmd(C_PIM_EXEC, 0, 1);
    for (int c = 0; c < NCOL; c++) check(arr[c] == st_val(c) && nwr[c] == 1, $sformatf("Exec(St) column %0d", c));
    // Exec(St) on 64..127 with a pause and a resume
    for (int c = 0; c < n_c; c++) nwr[c] = 0;
    d1 = n_done;
    send(C_PIM_EXEC, 64, 1);
    repeat (10 + $urandom % 80) @(negedge clk);
    send(C_PIM_PAUSE);
    repeat (T_CCD + 2) @(negedge clk);
    check(!pee_running, "engine still running after pause");
    repeat (5 + $urandom % 30) @(negedge clk);
    send(C_PIM_EXEC, 0, 1);   // resume: the column carried is ignored
    wait (n_done == d1 + 1); @(negedge clk);
    for (int c = 64; c < 128; c++) check(arr[c] == st_val(c) && nwr[c] == 1, $sformatf("paused Exec(St) column %0d", c));
    for (int c = 0; c < 64; c++) check(nwr[c] == 0, "resumption wrote a wrong column");
    // LdBuf columns 64..127, RdBuf x32
    run_cmd(C_PIM_LDBUF, 64, 0);
    for (int i = 0; i < n_slots; i++) begin
      @(negedge clk); ca = '0; ca.cmd = C_PIM_RDBUF; ca.bank = 5;
      @(posedge clk); #1;
      check(dq_rvalid && dq_rdata == {arr[64 + 2 * i + 1], arr[64 + 2 * i]}, $sformatf("RdBuf burst %0d", i));
    end
    @(negedge clk); ca = '0; ca.cmd = C_NOP;
    @(posedge clk); #1 check(!dq_rvalid, "spurious dq_rvalid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
