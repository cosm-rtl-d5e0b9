// pee: PIM Execution Engine of one bank.
//
// Runs one preemptable PIM command (PIM_Exec(Ld), PIM_Exec(St), PIM_LdBuf or
// PIM_StBuf) on its own: it holds the Command Register (CR), the Column State
// Counter (CSC) and the PIM Counter (PC).  A command seen in cycle s loads
// CSC with the start column, PC with 0 and CR with the kind, and issues
// column operations in cycles s+1, s+1+tCCD, s+1+2*tCCD, ... with CSC as the
// column address, incrementing CSC and PC after each one.  After
// N_PTL/tCCD columns it returns to its default state (csc_valid = 0, the
// "-1" of the timing diagram) and pulses done.
//
// PIM_Pause in cycle p issues no further column after cycle p; the column in
// progress finishes (up to tCCD cycles) and CSC/PC freeze on the last issued
// column ("the Switch opens").  Reissuing a command while CSC is valid is a
// resumption: the engine continues at CSC+1 / PC+1 and ignores the start
// column carried by the command.  Pausing exactly at column boundaries keeps
// progress deterministic, so the memory controller infers PC from the cycle
// counts alone.  The state machine, the registers and the resume rule follow
// the paper's timing example; the cycle in which the first column is issued
// (one after the command) is this design's choice.
module pee
  import cosm_pkg::*;
#(
  parameter int unsigned TCCD   = T_CCD,
  parameter int unsigned NPTL   = N_PTL,
  parameter int unsigned CW     = COL_W,
  localparam int unsigned NCOL  = NPTL / TCCD,
  localparam int unsigned PC_W  = $clog2(NCOL + 1),
  localparam int unsigned TK_W  = (TCCD > 1) ? $clog2(TCCD) : 1
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  pim_kind_e       start_kind,
  input  logic [CW-1:0]   start_col,
  input  logic            pause,
  output logic            col_valid,
  output logic [CW-1:0]   col_addr,
  output logic [PC_W-1:0] col_idx,
  output pim_kind_e       col_kind,
  output logic            running,
  output logic            csc_valid,
  output logic            done
);

  pim_kind_e       cr;
  logic [CW-1:0]   csc;
  logic [PC_W-1:0] pc;
  logic [TK_W-1:0] tick;
  logic            run_q, pausing, valid_q;

  wire last_tick = (tick == TK_W'(TCCD - 1));
  wire last_col  = (pc == PC_W'(NCOL - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr      <= K_EXEC_LD;
      csc     <= '0;
      pc      <= '0;
      tick    <= '0;
      run_q   <= 1'b0;
      pausing <= 1'b0;
      valid_q <= 1'b0;
    end else if (run_q) begin
      if (pause) pausing <= 1'b1;
      if (last_tick) begin
        tick <= '0;
        if (last_col) begin
          run_q   <= 1'b0;          // back to the default state
          valid_q <= 1'b0;
          pausing <= 1'b0;
        end else if (pausing || pause) begin
          run_q   <= 1'b0;          // freeze CSC / PC on the finished column
          pausing <= 1'b0;
        end else begin
          csc <= csc + 1'b1;
          pc  <= pc + 1'b1;
        end
      end else begin
        tick <= tick + 1'b1;
      end
    end else if (start) begin
      run_q <= 1'b1;
      tick  <= '0;
      if (valid_q) begin            // CSC != -1: resumption
        csc <= csc + 1'b1;
        pc  <= pc + 1'b1;
      end else begin
        csc     <= start_col;
        pc      <= '0;
        cr      <= start_kind;
        valid_q <= 1'b1;
      end
    end
  end

  // A column is issued in the first cycle of each tCCD step, unless a pause
  // arrived in an earlier cycle of the command.
  assign col_valid = run_q && (tick == '0) && !pausing;
  assign col_addr  = csc;
  assign col_idx   = pc;
  assign col_kind  = cr;
  assign running   = run_q;
  assign csc_valid = valid_q;
  assign done      = run_q && last_tick && last_col;

  // A pause must come at least tCCD after the command (Table 1): never in
  // the cycle in which the command itself arrives.
  a_no_start_while_running: assert property (@(posedge clk) disable iff (!rst_n)
    !(start && run_q));

endmodule
