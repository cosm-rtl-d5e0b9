// cosm_pkg: types and constants shared by the cooperative CPU/PIM memory
// controller and the per-bank PIM logic of one LPDDR5 channel.
//
// Organisation follows the evaluated system: 2 ranks per channel, 16 banks
// per rank (4 bank groups x 4 banks), 16384 rows of 2048 B, one PIM unit and
// one 1 kB staging buffer per bank.  A bank is named by a global index
// rank*16 + bank.  A "column" here is one internal PIM access of 128 bits
// (16 B), so a 2 kB row holds 128 of them; one external burst is 32 B
// (x16 device, BL16) and moves two internal columns.  The 16 B internal
// column and the 2.5 ns tCCD reproduce the 6.4 GB/s per-bank PIM bandwidth;
// both are this design's reading of the configuration, not stated sizes.
//
// Timing is counted in controller clock cycles of 1.25 ns (the 800 MHz
// command clock of LPDDR5-6400).  The nanosecond values of the system
// configuration are divided by 1.25 and rounded up.  tCCD is not listed and
// is taken equal to tBL; with nPTL = 128 cycles this gives the 64 columns
// per PIM command that the timing example shows.
package cosm_pkg;

  // ---- organisation ------------------------------------------------------
  localparam int unsigned N_RANKS        = 2;
  localparam int unsigned BANKS_PER_RANK = 16;
  localparam int unsigned N_BANKS        = N_RANKS * BANKS_PER_RANK;
  localparam int unsigned BANK_W         = $clog2(N_BANKS);
  localparam int unsigned LBANK_W        = $clog2(BANKS_PER_RANK);
  localparam int unsigned RANK_W         = (N_RANKS > 1) ? $clog2(N_RANKS) : 1;
  localparam int unsigned ROW_W          = 14;    // 16384 rows
  localparam int unsigned COL_W          = 7;     // 128 internal columns of 16 B
  localparam int unsigned COL_BITS       = 128;   // internal column word
  localparam int unsigned BURST_BITS     = 256;   // one external burst, 32 B
  localparam int unsigned BUF_BYTES      = 1024;  // staging buffer per bank
  localparam int unsigned BUF_WORDS      = BUF_BYTES * 8 / COL_BITS;   // 64
  localparam int unsigned BUF_SLOTS      = BUF_BYTES * 8 / BURST_BITS; // 32
  localparam int unsigned TAG_W          = 8;     // CPU request tag

  // ---- timing, controller cycles of 1.25 ns --------------------------------
  localparam int unsigned T_BL   = 2;    // 2.5 ns
  localparam int unsigned T_RCD  = 4;    // 4.7 ns
  localparam int unsigned T_RP   = 4;    // 4.7 ns
  localparam int unsigned T_CL   = 6;    // 6.3 ns
  localparam int unsigned T_RAS  = 9;    // 10.7 ns
  localparam int unsigned T_RRD  = 2;    // 1.3 ns
  localparam int unsigned T_RFC  = 70;   // 87.5 ns
  localparam int unsigned T_WR   = 8;    // 8.8 ns
  localparam int unsigned T_RTP  = 2;    // 1.3 ns
  localparam int unsigned T_REFI = 774;  // 967.5 ns
  localparam int unsigned T_CCD  = 2;    // not listed: equal to tBL
  localparam int unsigned N_PTL  = 128;  // PIM command length, cycles
  localparam int unsigned N_COLS_PER_CMD = N_PTL / T_CCD;  // 64

  localparam int unsigned WAIT_W = 8;    // width of "cycles until legal" counters
  localparam int unsigned WIN_W  = 10;   // width of idle-window estimates
  localparam int unsigned CYC_W  = 16;   // free-running cycle counter (StartAt)

  // ---- DRAM command bus ------------------------------------------------------
  typedef enum logic [3:0] {
    C_NOP       = 4'd0,
    C_ACT       = 4'd1,
    C_PRE       = 4'd2,
    C_RD        = 4'd3,
    C_WR        = 4'd4,
    C_REF       = 4'd5,   // all-bank refresh of one rank
    C_PIM_EXEC  = 4'd6,   // PIM_Exec(Ld) / PIM_Exec(St), see .st
    C_PIM_PAUSE = 4'd7,
    C_PIM_LDBUF = 4'd8,   // bank -> buffer, nPTL long, preemptable
    C_PIM_STBUF = 4'd9,   // buffer -> bank, nPTL long, preemptable
    C_PIM_RDBUF = 4'd10,  // buffer -> memory controller, one burst
    C_PIM_WRBUF = 4'd11   // memory controller -> buffer, one burst
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e              cmd;
    logic [BANK_W-1:0]      bank;   // global bank index (rank in the MSBs)
    logic [ROW_W-1:0]       row;
    logic [COL_W-1:0]       col;
    logic                   st;     // PIM_Exec(St) when set
  } dram_cmd_t;

  // ---- what a PEE runs -------------------------------------------------------
  typedef enum logic [1:0] {
    K_EXEC_LD = 2'd0,
    K_EXEC_ST = 2'd1,
    K_LDBUF   = 2'd2,
    K_STBUF   = 2'd3
  } pim_kind_e;

  // ---- host-side requests --------------------------------------------------------
  typedef struct packed {
    logic                   we;
    logic [BANK_W-1:0]      bank;
    logic [ROW_W-1:0]       row;
    logic [COL_W-1:0]       col;
    logic [TAG_W-1:0]       tag;
  } cpu_req_t;

  typedef enum logic [2:0] {
    P_EXEC_LD = 3'd0,
    P_EXEC_ST = 3'd1,
    P_WRBUF   = 3'd2,
    P_RDBUF   = 3'd3,
    P_LDBUF   = 3'd4,
    P_STBUF   = 3'd5,
    P_BARRIER = 3'd6
  } pim_op_e;

  typedef struct packed {
    pim_op_e                op;
    logic [BANK_W-1:0]      bank;
    logic [ROW_W-1:0]       row;
    logic [COL_W-1:0]       col;
  } pim_req_t;

  // ---- controller view of a bank -----------------------------------------------
  typedef struct packed {
    logic                   open;
    logic [ROW_W-1:0]       row;
    logic [WAIT_W-1:0]      act_wait;  // cycles until ACT is legal
    logic [WAIT_W-1:0]      col_wait;  // cycles until RD/WR/PIM column command
    logic [WAIT_W-1:0]      pre_wait;  // cycles until PRE is legal
    logic [WAIT_W-1:0]      buf_wait;  // cycles until the next PIM buffer command
  } bank_state_t;

  // Arbiter-side record of a bank's PIM command (StartAt / PC_inf of Fig. 5).
  typedef enum logic [1:0] {
    PS_IDLE    = 2'd0,
    PS_RUN     = 2'd1,
    PS_PAUSING = 2'd2,   // PIM_Pause sent, current column still finishing
    PS_PAUSED  = 2'd3
  } pim_state_e;

  // PRE delay after a PIM command on a bank stops (Table 1).
  function automatic int unsigned pim_pre_delay(input logic st);
    return st ? (T_CCD + T_WR) : T_RTP;
  endfunction

  function automatic logic [RANK_W-1:0] rank_of(input logic [BANK_W-1:0] b);
    return RANK_W'(b >> LBANK_W);
  endfunction

endpackage
