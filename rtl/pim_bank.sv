// pim_bank: device-side PIM logic of one DRAM bank (DRAM interface decode,
// PEE and staging buffer).
//
// It watches the shared C/A bus and reacts to the commands addressed to
// bank BANK_ID:
//   PIM_Exec / PIM_LdBuf / PIM_StBuf  start (or resume) the PEE
//   PIM_Pause                          pause the PEE at the next column end
//   PIM_WrBuf                          write one burst from the data bus into
//                                      the buffer (no address, Fig. 6a)
//   PIM_RdBuf                          read one burst from the buffer onto
//                                      the data bus, one cycle later
// Every PEE column step is routed by the Command Register:
//   Exec(Ld): bank column -> PIM unit        Exec(St): PIM unit -> bank column
//   LdBuf:    bank column -> buffer[PC]      StBuf:    buffer[PC] -> bank column
// The DRAM array and the PIM unit are outside this module: the array is
// reached through a column port (arr_*, combinational read data, row opened
// by ACT on the C/A bus) and the PIM unit through pu_*.  Normal CPU reads and
// writes go to the array directly and do not pass through here.  The end of
// a PIM_LdBuf or PIM_StBuf clears the buffer's burst pointer.  The routing
// follows the data paths of the paper; the port shapes are this design's.
module pim_bank
  import cosm_pkg::*;
#(
  parameter int unsigned BANK_ID = 0,
  parameter int unsigned TCCD    = T_CCD,
  parameter int unsigned NPTL    = N_PTL,
  localparam int unsigned NCOL   = NPTL / TCCD,
  localparam int unsigned PC_W   = $clog2(NCOL + 1)
)(
  input  logic                   clk,
  input  logic                   rst_n,
  input  dram_cmd_t              ca,          // C/A bus
  input  logic [BURST_BITS-1:0]  dq_wdata,    // data bus, PIM_WrBuf
  output logic                   dq_rvalid,   // data bus, PIM_RdBuf
  output logic [BURST_BITS-1:0]  dq_rdata,
  // DRAM array column port of this bank
  output logic                   arr_en,
  output logic                   arr_we,
  output logic [COL_W-1:0]       arr_col,
  output logic [COL_BITS-1:0]    arr_wdata,
  input  logic [COL_BITS-1:0]    arr_rdata,
  // PIM unit port
  output logic                   pu_valid,
  output logic                   pu_st,        // 1: unit supplies data to store
  output logic [COL_W-1:0]       pu_col,
  output logic [COL_BITS-1:0]    pu_ldata,     // bank data for Exec(Ld)
  input  logic [COL_BITS-1:0]    pu_sdata,     // result for Exec(St)
  output logic                   pee_running,
  output logic                   pee_done
);

  localparam int unsigned BIDX_W = $clog2(BUF_WORDS);

  wire mine = (ca.bank == BANK_W'(BANK_ID)) && (ca.cmd != C_NOP);

  logic      start, pause;
  pim_kind_e start_kind;

  always_comb begin
    start      = 1'b0;
    start_kind = K_EXEC_LD;
    if (mine) begin
      unique case (ca.cmd)
        C_PIM_EXEC:  begin start = 1'b1; start_kind = ca.st ? K_EXEC_ST : K_EXEC_LD; end
        C_PIM_LDBUF: begin start = 1'b1; start_kind = K_LDBUF; end
        C_PIM_STBUF: begin start = 1'b1; start_kind = K_STBUF; end
        default: ;
      endcase
    end
  end
  assign pause = mine && (ca.cmd == C_PIM_PAUSE);

  logic            col_valid, running, csc_valid, done;
  logic [COL_W-1:0] col_addr;
  logic [PC_W-1:0] col_idx;
  pim_kind_e       col_kind;

  pee #(.TCCD(TCCD), .NPTL(NPTL), .CW(COL_W)) u_pee (
    .clk, .rst_n,
    .start, .start_kind, .start_col(ca.col), .pause,
    .col_valid, .col_addr, .col_idx, .col_kind,
    .running, .csc_valid, .done
  );

  logic                buf_int_we;
  logic [COL_BITS-1:0] buf_int_rdata;
  logic [$clog2(BUF_SLOTS)-1:0] buf_ptr;

  pim_buffer #(.WORDS(BUF_WORDS), .WBITS(COL_BITS)) u_buf (
    .clk, .rst_n,
    .int_we   (buf_int_we),
    .int_idx  (BIDX_W'(col_idx)),
    .int_wdata(arr_rdata),
    .int_rdata(buf_int_rdata),
    .ext_we   (mine && ca.cmd == C_PIM_WRBUF),
    .ext_re   (mine && ca.cmd == C_PIM_RDBUF),
    .ext_wdata(dq_wdata),
    .ext_rvalid(dq_rvalid),
    .ext_rdata(dq_rdata),
    .ptr_clr  (done && (col_kind == K_LDBUF || col_kind == K_STBUF)),
    .ext_ptr  (buf_ptr)
  );

  always_comb begin
    arr_en     = col_valid;
    arr_we     = col_valid && (col_kind == K_EXEC_ST || col_kind == K_STBUF);
    arr_col    = col_addr;
    arr_wdata  = (col_kind == K_STBUF) ? buf_int_rdata : pu_sdata;
    buf_int_we = col_valid && (col_kind == K_LDBUF);
    pu_valid   = col_valid && (col_kind == K_EXEC_LD || col_kind == K_EXEC_ST);
    pu_st      = (col_kind == K_EXEC_ST);
    pu_col     = col_addr;
    pu_ldata   = arr_rdata;
  end

  assign pee_running = running;
  assign pee_done    = done;

endmodule
