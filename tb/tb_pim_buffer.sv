// tb_pim_buffer: self-checking test of the 1 kB PIM staging buffer.
//
// A reference array mirrors the buffer.  Random mixes of internal column
// writes (128 bit, any index) and external bursts (256 bit, auto-increment
// slot pointer) are applied; internal reads are compared combinationally and
// external reads are compared one cycle after the request (ext_rvalid).
// ptr_clr must return the slot pointer to 0.  Default parameters (64 words).
module tb_pim_buffer;
  import cosm_pkg::*;

  localparam int unsigned WORDS = BUF_WORDS;
  localparam int unsigned IDX_W = $clog2(WORDS);
  localparam int unsigned SLOT_W = $clog2(WORDS / 2);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  int_we = 0, ext_we = 0, ext_re = 0, ptr_clr = 0;
  logic [IDX_W-1:0]      int_idx = '0;
  logic [COL_BITS-1:0]   int_wdata = '0, int_rdata;
  logic [2*COL_BITS-1:0] ext_wdata = '0, ext_rdata;
  logic                  ext_rvalid;
  logic [SLOT_W-1:0]     ext_ptr;

  pim_buffer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  logic [COL_BITS-1:0]   ref_m [WORDS];
  logic [2*COL_BITS-1:0] exp_r;
  bit                    exp_v = 0;
  int                    ptr = 0;
  int                    n_words = WORDS;

  function automatic logic [COL_BITS-1:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill through the internal port
    for (int i = 0; i < n_words; i++) begin
      @(negedge clk);
      int_we = 1; int_idx = IDX_W'(i); int_wdata = rnd128(); ref_m[i] = int_wdata;
    end
    @(negedge clk); int_we = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int op = $urandom % 5;
      @(negedge clk);
      if (exp_v) check(ext_rvalid && ext_rdata == exp_r, "external read data");
      else       check(!ext_rvalid, "spurious ext_rvalid");
      exp_v = 0;
      check(int'(ext_ptr) == ptr, $sformatf("slot pointer %0d, expected %0d", ext_ptr, ptr));
      int_we = 0; ext_we = 0; ext_re = 0; ptr_clr = 0;
      int_idx = IDX_W'($urandom % WORDS);
      #1 check(int_rdata == ref_m[int_idx], "internal read data");
      case (op)
        0: begin int_we = 1; int_wdata = rnd128(); ref_m[int_idx] = int_wdata; end
        1: begin
             ext_we = 1; ext_wdata = {rnd128(), rnd128()};
             ref_m[2 * ptr] = ext_wdata[COL_BITS-1:0];
             ref_m[2 * ptr + 1] = ext_wdata[2*COL_BITS-1:COL_BITS];
             ptr = (ptr + 1) % (WORDS / 2);
           end
        2: begin
             ext_re = 1; exp_r = {ref_m[2 * ptr + 1], ref_m[2 * ptr]}; exp_v = 1;
             ptr = (ptr + 1) % (WORDS / 2);
           end
        3: begin ptr_clr = 1; ptr = 0; end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
