// iwe: Idle Window Estimator (Algorithm 1 of the design).
//
// From the earliest-arriving CPU request of every bank it predicts when the
// FR-FCFS scheduler will serve each of them, and so how long every bank and
// the data bus stay free of CPU work.  All times are in cycles from now.
//
// Ready time of a bank's request, from the bank state:
//   row closed                  act_wait + tRCD
//   open to the target row      col_wait
//   open to a different row     pre_wait + tRP + tRCD
// Then, as in Algorithm 1: t starts when the bus is next free and cr is the
// rank of the last issued command.  Repeatedly, if a request of rank cr is
// ready at t, the one with the earliest ready time is served at t;
// otherwise the request with the earliest ready time overall is served at
// max(ready, t) and cr becomes its rank.  Each service occupies the bus for
// tBL.  window_bank[b] is the service time of bank b's request (all ones
// when none is pending) and window_bus the smallest service time.
// The loop is unrolled into combinational logic, one stage per bank, so the
// estimate is fresh every cycle.  Algorithm 1 advances t by tBL only in the
// rank-hit branch and records the advanced value; here every served request
// is recorded at the cycle its burst starts and then advances t by tBL,
// which keeps two predicted bursts from sharing the bus.
module iwe
  import cosm_pkg::*;
#(
  parameter int unsigned NB = N_BANKS,
  parameter int unsigned NR = N_RANKS
)(
  input  logic [NB-1:0]     head_valid,
  input  cpu_req_t          head [NB],
  input  bank_state_t       bs [NB],
  input  logic [RANK_W-1:0] cur_rank,
  input  logic [WAIT_W-1:0] bus_wait,
  output logic [WIN_W-1:0]  window_bank [NB],
  output logic [WIN_W-1:0]  window_bus
);

  localparam int unsigned BPR = NB / NR;
  localparam logic [WIN_W-1:0] WMAX = '1;

  function automatic logic [WIN_W-1:0] sat_add(input logic [WIN_W-1:0] a, input int unsigned b);
    logic [WIN_W:0] s;
    s = {1'b0, a} + (WIN_W+1)'(b);
    return s[WIN_W] ? WMAX : s[WIN_W-1:0];
  endfunction

  logic [WIN_W-1:0] ready [NB];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      if (!bs[b].open)
        ready[b] = sat_add(WIN_W'(bs[b].act_wait), T_RCD);
      else if (bs[b].row == head[b].row)
        ready[b] = WIN_W'(bs[b].col_wait);
      else
        ready[b] = sat_add(WIN_W'(bs[b].pre_wait), T_RP + T_RCD);
    end
  end

  always_comb begin
    logic [NB-1:0]      left;
    logic [WIN_W-1:0]   t;
    logic [RANK_W-1:0]  cr;
    left = head_valid;
    t    = WIN_W'(bus_wait);
    cr   = cur_rank;
    for (int b = 0; b < NB; b++) window_bank[b] = WMAX;
    window_bus = WMAX;
    for (int it = 0; it < NB; it++) begin
      automatic logic             any_rdy = 1'b0;
      automatic logic             found_r = 1'b0;
      automatic logic             found_a = 1'b0;
      automatic int unsigned      pick_r = 0, pick_a = 0;
      automatic logic [WIN_W-1:0] best_r = WMAX, best_a = WMAX;
      for (int b = 0; b < NB; b++) begin
        if (left[b]) begin
          if (!found_a || ready[b] < best_a) begin
            found_a = 1'b1; best_a = ready[b]; pick_a = b;
          end
          if (RANK_W'(b / BPR) == cr) begin
            if (ready[b] <= t) any_rdy = 1'b1;
            if (!found_r || ready[b] < best_r) begin
              found_r = 1'b1; best_r = ready[b]; pick_r = b;
            end
          end
        end
      end
      if (found_a) begin
        if (any_rdy) begin
          window_bank[pick_r] = t;
          left[pick_r] = 1'b0;
        end else begin
          if (best_a > t) t = best_a;
          cr = RANK_W'(pick_a / BPR);
          window_bank[pick_a] = t;
          left[pick_a] = 1'b0;
        end
        if (t < window_bus) window_bus = t;
        t = sat_add(t, T_BL);
      end
    end
  end

endmodule
