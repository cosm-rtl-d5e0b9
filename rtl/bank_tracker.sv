// bank_tracker: the controller's model of DRAM state and timing.
//
// For every bank it keeps the open row and four "cycles until legal"
// counters (ACT, column command, PRE, PIM buffer command); per rank the
// tRRD spacing between ACTs; per channel the spacing of data-bus commands.
// Counters count down to zero every cycle and are raised by the command
// issued in that cycle (cmd, NOP when none):
//   ACT       col_wait = tRCD, pre_wait = tRAS, rank rrd = tRRD
//   PRE       act_wait = tRP, row closed
//   RD        pre_wait >= tRTP, bus = tBL
//   WR        pre_wait >= tBL + tWR, bus = tBL
//   REF       act_wait = tRFC for every bank of the rank
//   PIM_RdBuf / PIM_WrBuf        bus = tBL, buf_wait = tBL
//   PIM_LdBuf / PIM_StBuf        buf_wait = tBL
// While a PIM command occupies a bank (pim_busy) its pre_wait is held at the
// PRE delay of Table 1 (tRTP after a load-type command, tCCD + tWR after a
// store-type one), so it counts down from the end of the last column.
// The rules are those of the paper's timing table and configuration, in the
// simplified form used here: no tWTR, no tFAW, no rank-switch penalty.
module bank_tracker
  import cosm_pkg::*;
#(
  parameter int unsigned NB = N_BANKS,
  parameter int unsigned NR = N_RANKS
)(
  input  logic          clk,
  input  logic          rst_n,
  input  dram_cmd_t     cmd,
  input  logic [NB-1:0] pim_busy,
  input  logic [NB-1:0] pim_st,
  output bank_state_t   bs [NB],
  output logic [WAIT_W-1:0] rrd_wait [NR],
  output logic [WAIT_W-1:0] bus_wait
);

  localparam int unsigned BPR = NB / NR;

  function automatic logic [WAIT_W-1:0] dec(input logic [WAIT_W-1:0] v);
    return (v == '0) ? '0 : v - 1'b1;
  endfunction
  function automatic logic [WAIT_W-1:0] maxw(input logic [WAIT_W-1:0] a, input int unsigned b);
    return (a > WAIT_W'(b)) ? a : WAIT_W'(b);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) bs[b] <= '0;
      for (int r = 0; r < NR; r++) rrd_wait[r] <= '0;
      bus_wait <= '0;
    end else begin
      for (int b = 0; b < NB; b++) begin
        bs[b].act_wait <= dec(bs[b].act_wait);
        bs[b].col_wait <= dec(bs[b].col_wait);
        bs[b].pre_wait <= pim_busy[b] ? WAIT_W'(pim_pre_delay(pim_st[b])) : dec(bs[b].pre_wait);
        bs[b].buf_wait <= dec(bs[b].buf_wait);
      end
      for (int r = 0; r < NR; r++) rrd_wait[r] <= dec(rrd_wait[r]);
      bus_wait <= dec(bus_wait);

      unique case (cmd.cmd)
        C_ACT: begin
          bs[cmd.bank].open     <= 1'b1;
          bs[cmd.bank].row      <= cmd.row;
          bs[cmd.bank].col_wait <= WAIT_W'(T_RCD - 1);
          bs[cmd.bank].pre_wait <= WAIT_W'(T_RAS - 1);
          rrd_wait[int'(cmd.bank) / BPR] <= WAIT_W'(T_RRD - 1);
        end
        C_PRE: begin
          bs[cmd.bank].open     <= 1'b0;
          bs[cmd.bank].act_wait <= WAIT_W'(T_RP - 1);
        end
        C_RD: begin
          bs[cmd.bank].pre_wait <= maxw(dec(bs[cmd.bank].pre_wait), T_RTP - 1);
          bus_wait <= WAIT_W'(T_BL - 1);
        end
        C_WR: begin
          bs[cmd.bank].pre_wait <= maxw(dec(bs[cmd.bank].pre_wait), T_BL + T_WR - 1);
          bus_wait <= WAIT_W'(T_BL - 1);
        end
        C_REF: begin
          for (int b = 0; b < NB; b++)
            if (b / BPR == int'(cmd.bank) / BPR) bs[b].act_wait <= WAIT_W'(T_RFC - 1);
        end
        C_PIM_RDBUF, C_PIM_WRBUF: begin
          bus_wait <= WAIT_W'(T_BL - 1);
          bs[cmd.bank].buf_wait <= WAIT_W'(T_BL - 1);
        end
        C_PIM_LDBUF, C_PIM_STBUF: begin
          bs[cmd.bank].buf_wait <= WAIT_W'(T_BL - 1);
        end
        default: ;
      endcase
    end
  end

endmodule
