// tb_bank_tracker: self-checking test of the bank timing tracker.
//
// Issues single commands and measures, in cycles, how long until the
// tracker allows the next dependent command, against the LPDDR5 timings in
// cycles: ACT->column tRCD, ACT->PRE tRAS, PRE->ACT tRP, RD->PRE tRTP,
// WR->PRE tBL+tWR, REF->ACT tRFC (the refreshed rank only), column and
// buffer transfers -> next burst tBL, ACT->ACT in a rank tRRD, and the
// Pause->PRE delay of a PIM command (tRTP for Ld, tCCD+tWR for St) counted
// from the end of the PIM command.  Bank indices are random.
module tb_bank_tracker;
  import cosm_pkg::*;

  localparam int unsigned NB = N_BANKS;
  localparam int unsigned NR = N_RANKS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dram_cmd_t         cmd = '0;
  logic [NB-1:0]     pim_busy = '0, pim_st = '0;
  bank_state_t       bs [NB];
  logic [WAIT_W-1:0] rrd_wait [NR];
  logic [WAIT_W-1:0] bus_wait;

  bank_tracker dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // field selector: 0 act_wait, 1 col_wait, 2 pre_wait, 3 buf_wait, 4 bus, 5 rrd
  function automatic int fld(int b, int f);
    case (f)
      0: return int'(bs[b].act_wait);
      1: return int'(bs[b].col_wait);
      2: return int'(bs[b].pre_wait);
      3: return int'(bs[b].buf_wait);
      4: return int'(bus_wait);
      default: return int'(rrd_wait[b / (NB / NR)]);
    endcase
  endfunction

  task automatic issue(input dram_cmd_e c, input int b, input int row = 0);
    @(negedge clk);
    cmd = '0; cmd.cmd = c; cmd.bank = BANK_W'(b); cmd.row = ROW_W'(row);
    @(negedge clk);
    cmd = '0; cmd.cmd = C_NOP;
  endtask

  // cycles from the command edge until field f of bank b allows the next one
  task automatic gap(input int b, input int f, input int expect_c, input string what);
    int n = 1;
    while (fld(b, f) != 0 && n < 200) begin @(negedge clk); n++; end
    check(n == expect_c, $sformatf("%s: %0d cycles, expected %0d", what, n, expect_c));
  endtask

  task automatic settle();
    repeat (120) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    cmd.cmd = C_NOP;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      automatic int b = $urandom % NB;
      automatic int other = (b + NB / NR) % NB;   // same index, other rank
      automatic int row = $urandom % 16384;
      issue(C_ACT, b, row);
      check(bs[b].open && int'(bs[b].row) == row, "ACT opens the row");
      gap(b, 5, T_RRD, "ACT->ACT same rank");
      settle();
      issue(C_ACT, b, row);  gap(b, 1, T_RCD, "ACT->column");
      settle();
      issue(C_PRE, b);       gap(b, 0, T_RP, "PRE->ACT");
      check(!bs[b].open, "PRE closes the bank");
      issue(C_ACT, b, row);  gap(b, 2, T_RAS, "ACT->PRE");
      issue(C_RD, b, row);   gap(b, 2, T_RTP, "RD->PRE");
      issue(C_RD, b, row);   gap(b, 4, T_BL, "RD->next burst");
      issue(C_WR, b, row);   gap(b, 2, T_BL + T_WR, "WR->PRE");
      issue(C_PIM_WRBUF, b); gap(b, 3, T_BL, "WrBuf->next buffer access");
      issue(C_PIM_LDBUF, b); gap(b, 3, T_BL, "LdBuf->next buffer access");
      // a PIM command holds PRE off until its Pause->PRE delay has passed
      for (int st = 0; st < 2; st++) begin
        @(negedge clk); pim_busy[b] = 1; pim_st[b] = 1'(st);
        repeat (1 + $urandom % 30) @(negedge clk);
        check(fld(b, 2) == pim_pre_delay(1'(st)), "PRE held during PIM command");
        pim_busy[b] = 0;
        @(negedge clk);
        gap(b, 2, pim_pre_delay(1'(st)), st ? "PIM St end->PRE" : "PIM Ld end->PRE");
      end
      issue(C_PRE, b);
      settle();
      issue(C_REF, b);
      check(fld(other, 0) == 0, "REF must not block the other rank");
      gap(b, 0, T_RFC, "REF->ACT");
      settle();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
