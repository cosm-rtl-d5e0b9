// tb_refresh_ctrl: self-checking test of the per-rank refresh timer.
//
// With the default tREFI (774 cycles) and 2 ranks, every rank must raise
// ref_pending once every tREFI cycles, the two ranks must be staggered by
// tREFI/2, and ref_pending must stay high until ref_done, which the bench
// answers after a random delay.
module tb_refresh_ctrl;
  import cosm_pkg::*;

  localparam int unsigned NR = N_RANKS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NR-1:0] ref_done = '0, ref_pending;

  refresh_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  longint cyc = 0;
  longint t_rise [NR];
  int     n_rise [NR];
  int     delay  [NR];
  logic [NR-1:0] prev = '0;
  int     n_ranks = NR;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int r = 0; r < n_ranks; r++) begin
      if (ref_pending[r] && !prev[r]) begin
        if (n_rise[r] > 0)
          check(cyc - t_rise[r] == T_REFI, $sformatf("rank %0d refresh interval %0d", r, cyc - t_rise[r]));
        t_rise[r] = cyc;
        n_rise[r]++;
        delay[r] = 1 + $urandom % 60;
      end
    end
    prev = ref_pending;
  end

  // answer each request after a random delay, and check it holds until then
  always @(negedge clk) begin
    ref_done = '0;
    for (int r = 0; r < n_ranks; r++)
      if (ref_pending[r]) begin
        if (delay[r] > 0) delay[r]--;
        else ref_done[r] = 1'b1;
      end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) begin t_rise[r] = 0; n_rise[r] = 0; delay[r] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20 * T_REFI) @(posedge clk);
    for (int r = 0; r < n_ranks; r++)
      check(n_rise[r] >= 19, $sformatf("rank %0d refreshed %0d times", r, n_rise[r]));
    for (int r = 1; r < n_ranks; r++) begin
      automatic longint d = (t_rise[r - 1] - t_rise[r] + 10 * T_REFI) % T_REFI;
      check(d == T_REFI / NR, $sformatf("rank stagger %0d, expected %0d", d, T_REFI / NR));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
