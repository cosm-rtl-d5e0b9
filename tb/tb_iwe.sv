// tb_iwe: self-checking test of the Idle Window Estimator.
//
// The reference replays the estimation loop step by step on random bank
// states and queue heads:
//   ready(b) = tRCD + act_wait        bank closed
//            = col_wait               target row open
//            = pre_wait + tRP + tRCD  other row open
//   t = bus_wait, rank = current rank; repeat: if some waiting bank of the
//   current rank is ready by t, serve the one ready earliest there;
//   otherwise jump t to the earliest ready bank of any rank and switch to its
//   rank; the served bank's window is t, then t += tBL.
// The bank windows and the bus window (the earliest predicted burst) must
// match; banks with no request report the largest value.  A directed case
// checks the hand-computed windows of three requests.
module tb_iwe;
  import cosm_pkg::*;

  localparam int unsigned NB = N_BANKS;
  localparam int unsigned NR = N_RANKS;
  localparam int unsigned BPR = NB / NR;
  localparam int WMAX = (1 << WIN_W) - 1;

  logic [NB-1:0]     head_valid;
  cpu_req_t          head [NB];
  bank_state_t       bs [NB];
  logic [RANK_W-1:0] cur_rank;
  logic [WAIT_W-1:0] bus_wait;
  logic [WIN_W-1:0]  window_bank [NB];
  logic [WIN_W-1:0]  window_bus;

  iwe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  int n_b = NB;
  int e_win [NB];
  int e_bus;

  task automatic reference();
    int rdy [NB];
    bit left [NB];
    int t = bus_wait, cr = cur_rank;
    e_bus = WMAX;
    for (int b = 0; b < n_b; b++) begin
      e_win[b] = WMAX;
      left[b] = head_valid[b];
      if (!bs[b].open)                 rdy[b] = T_RCD + bs[b].act_wait;
      else if (bs[b].row == head[b].row) rdy[b] = bs[b].col_wait;
      else                             rdy[b] = bs[b].pre_wait + T_RP + T_RCD;
    end
    forever begin
      int pick = -1;
      bit in_rank = 0;
      for (int b = 0; b < n_b; b++)
        if (left[b] && b / BPR == cr && rdy[b] <= t) in_rank = 1;
      for (int b = 0; b < n_b; b++)
        if (left[b] && (!in_rank || b / BPR == cr) && (pick < 0 || rdy[b] < rdy[pick])) pick = b;
      if (pick < 0) break;
      if (!in_rank) begin
        if (rdy[pick] > t) t = rdy[pick];
        cr = pick / BPR;
      end
      e_win[pick] = t;
      left[pick] = 0;
      if (t < e_bus) e_bus = t;
      t = t + T_BL;
    end
  endtask

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // directed: bank 0 hit, bank 1 closed, bank 16 (other rank) hit
    head_valid = '0; cur_rank = 0; bus_wait = 1;
    for (int b = 0; b < n_b; b++) begin bs[b] = '0; head[b] = '0; end
    head_valid[0] = 1; head[0].row = 5; bs[0].open = 1; bs[0].row = 5;
    head_valid[1] = 1; head[1].row = 7;
    head_valid[16] = 1; head[16].row = 9; bs[16].open = 1; bs[16].row = 9;
    #1;
    // t=1: bank 0 ready (0) in rank 0 -> window 1; t=3: nothing of rank 0
    // ready (bank 1 needs tRCD=4) -> earliest of all is bank 16 (0) -> window 3,
    // switch to rank 1; t=5: rank 1 empty -> bank 1 at max(5,4)=5.
    check(window_bank[0] == 1 && window_bank[16] == 3 && window_bank[1] == 5 && window_bus == 1,
          $sformatf("directed windows %0d %0d %0d bus %0d", window_bank[0], window_bank[16],
                    window_bank[1], window_bus));
    check(window_bank[2] == WIN_W'(WMAX), "bank without request");
    for (int n = 0; n < 20000; n++) begin
      for (int b = 0; b < n_b; b++) begin
        head_valid[b] = ($urandom % 100) < 25;
        head[b] = '0; head[b].bank = BANK_W'(b); head[b].row = ROW_W'($urandom % 2);
        bs[b] = '0; bs[b].open = 1'($urandom); bs[b].row = ROW_W'($urandom % 2);
        bs[b].act_wait = WAIT_W'($urandom % 8);
        bs[b].col_wait = WAIT_W'($urandom % 5);
        bs[b].pre_wait = WAIT_W'($urandom % 10);
      end
      cur_rank = RANK_W'($urandom % NR);
      bus_wait = WAIT_W'($urandom % 3);
      #1;
      reference();
      check(int'(window_bus) == e_bus, $sformatf("bus window %0d, expected %0d", window_bus, e_bus));
      for (int b = 0; b < n_b; b++)
        check(int'(window_bank[b]) == e_win[b],
              $sformatf("bank %0d window %0d, expected %0d", b, window_bank[b], e_win[b]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
