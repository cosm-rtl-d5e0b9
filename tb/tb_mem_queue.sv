// tb_mem_queue: self-checking test of the CPU request queue.
//
// A reference queue (SystemVerilog queue, oldest first) follows random
// pushes and removals at random positions.  Every cycle the entries, the
// valid vector, the count, in_ready (full queue) and the per-bank oldest
// request (head/head_valid/bank_pending) are compared.  16 entries, 32 banks
// (defaults); requests use only 4 banks so that heads change often.
module tb_mem_queue;
  import cosm_pkg::*;

  localparam int unsigned QD = 16;
  localparam int unsigned NB = N_BANKS;
  localparam int unsigned QI_W = $clog2(QD);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              in_valid = 0, in_ready, rm_valid = 0;
  cpu_req_t          in_req = '0;
  logic [QI_W-1:0]   rm_idx = '0;
  logic [QD-1:0]     ent_valid;
  cpu_req_t          ent [QD];
  logic [NB-1:0]     head_valid, bank_pending;
  cpu_req_t          head [NB];
  logic [$clog2(QD+1)-1:0] count;

  mem_queue dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  cpu_req_t model [$];
  int n_q = QD, n_b = NB;

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // compare with the model
      check(int'(count) == model.size(), $sformatf("count %0d, model %0d", count, model.size()));
      for (int i = 0; i < n_q; i++) begin
        check(ent_valid[i] == (i < model.size()), "ent_valid");
        if (i < model.size()) check(ent[i] == model[i], $sformatf("entry %0d", i));
      end
      for (int b = 0; b < n_b; b++) begin
        automatic int first = -1;
        for (int i = model.size() - 1; i >= 0; i--) if (int'(model[i].bank) == b) first = i;
        check(head_valid[b] == (first >= 0) && bank_pending[b] == (first >= 0), "head_valid");
        if (first >= 0) check(head[b] == model[first], $sformatf("head of bank %0d", b));
      end
      // next stimulus
      in_valid = ($urandom % 100) < 55;
      in_req.we = 1'($urandom); in_req.bank = BANK_W'($urandom % 4);
      in_req.row = ROW_W'($urandom); in_req.col = COL_W'($urandom); in_req.tag = TAG_W'(n);
      rm_valid = (model.size() > 0) && (($urandom % 100) < 45);
      rm_idx = QI_W'(model.size() > 0 ? $urandom % model.size() : 0);
      #1;
      check(in_ready == (model.size() < QD || rm_valid), "in_ready");
      if (rm_valid) model.delete(int'(rm_idx));
      if (in_valid && in_ready) model.push_back(in_req);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
