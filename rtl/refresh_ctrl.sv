// refresh_ctrl: per-rank refresh timer.
//
// Each rank has a counter that raises ref_pending[r] every T_REFI cycles;
// the request stays up until the scheduler issues REF to that rank
// (ref_done[r]).  Rank r starts with an offset of r*T_REFI/N_RANKS so the
// ranks do not refresh together.  While a rank's refresh is pending the
// FR-FCFS scheduler closes its banks and issues REF, and the arbiter pauses
// any PIM command running in that rank.  The paper shows a refresh source
// feeding the FR-FCFS scheduler; the all-bank, one-pending-request form is
// this design's choice.
module refresh_ctrl
  import cosm_pkg::*;
#(
  parameter int unsigned NR    = N_RANKS,
  parameter int unsigned TREFI = T_REFI,
  localparam int unsigned CW   = $clog2(TREFI + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NR-1:0] ref_done,
  output logic [NR-1:0] ref_pending
);

  logic [CW-1:0] cnt [NR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NR; r++) cnt[r] <= CW'(r * TREFI / NR);
      ref_pending <= '0;
    end else begin
      for (int r = 0; r < NR; r++) begin
        if (cnt[r] == CW'(TREFI - 1)) cnt[r] <= '0;
        else                          cnt[r] <= cnt[r] + 1'b1;
        if (cnt[r] == CW'(TREFI - 1)) ref_pending[r] <= 1'b1;
        else if (ref_done[r])         ref_pending[r] <= 1'b0;
      end
    end
  end

endmodule
