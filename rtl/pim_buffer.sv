// pim_buffer: the per-bank SRAM staging buffer of bandwidth-decoupled
// CPU-mediated transfers.
//
// 1 kB, held as BUF_WORDS words of one internal column (128 bits).  It has
// two sides, used by different commands:
//  * internal side (PIM_LdBuf / PIM_StBuf): the PEE reads or writes word
//    int_idx, its PIM Counter, once per column step.  Reads are
//    combinational so the word can be written to the bank in the same cycle.
//  * external side (PIM_WrBuf / PIM_RdBuf): one 32 B burst = two words per
//    command.  The command carries no address; a slot pointer advances by one
//    burst per command and is cleared by ptr_clr (the end of an internal
//    transfer), so a write stream fills the buffer from slot 0 and a read
//    stream drains it from slot 0.  Read data is registered: it appears the
//    cycle after the command, with ext_rvalid.
// The two sides never touch the same word in one cycle: the scheduler keeps
// tBL between buffer commands of a bank.  Size and function follow the paper;
// the word layout and the slot pointer are this design's choices.
module pim_buffer
  import cosm_pkg::*;
#(
  parameter int unsigned WORDS = BUF_WORDS,
  parameter int unsigned WBITS = COL_BITS,
  localparam int unsigned IDX_W  = $clog2(WORDS),
  localparam int unsigned SLOTS  = WORDS / 2,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1
)(
  input  logic                 clk,
  input  logic                 rst_n,
  // internal side
  input  logic                 int_we,
  input  logic [IDX_W-1:0]     int_idx,
  input  logic [WBITS-1:0]     int_wdata,
  output logic [WBITS-1:0]     int_rdata,
  // external side
  input  logic                 ext_we,
  input  logic                 ext_re,
  input  logic [2*WBITS-1:0]   ext_wdata,
  output logic                 ext_rvalid,
  output logic [2*WBITS-1:0]   ext_rdata,
  input  logic                 ptr_clr,
  output logic [SLOT_W-1:0]    ext_ptr
);

  logic [WBITS-1:0] mem [WORDS];

  wire [IDX_W-1:0] lo_idx = {ext_ptr, 1'b0};
  wire [IDX_W-1:0] hi_idx = {ext_ptr, 1'b1};

  always_ff @(posedge clk) begin
    if (int_we) mem[int_idx] <= int_wdata;
    if (ext_we) begin
      mem[lo_idx] <= ext_wdata[WBITS-1:0];
      mem[hi_idx] <= ext_wdata[2*WBITS-1:WBITS];
    end
    if (ext_re) ext_rdata <= {mem[hi_idx], mem[lo_idx]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_ptr    <= '0;
      ext_rvalid <= 1'b0;
    end else begin
      ext_rvalid <= ext_re;
      if (ptr_clr)               ext_ptr <= '0;
      else if (ext_we || ext_re) ext_ptr <= ext_ptr + 1'b1;
    end
  end

  assign int_rdata = mem[int_idx];

endmodule
