// controller: schedules the time-steps of ORBGRAND and builds the combined syndrome s_c.
//
// After start (one cycle before the sorted syndromes are ready) the controller runs:
//   1. one step testing every 1-bit pattern (onebit = 1, sc = hard-decision syndrome);
//   2. for each logistic weight LW = 3 .. LW_max, in ascending order:
//      a. one step testing all partitions of size 2 and 3 (pair_en = 1, t = LW);
//      b. for each size P = 4 .. P_max, one step per choice of the smallest parts
//         lambda_4 > ... > lambda_P >= 1 (lambda_P varies slowest, lambda_4 fastest),
//         for which lambda_1 > lambda_2 > lambda_3 > lambda_4 can still complete the sum,
//         i.e. LW - sum(lambda_4..lambda_P) >= 3*lambda_4 + 6 (the bound of Eq. (1)).
//         Then t = LW - sum and sc = syn_hat ^ s_{lambda_4} ^ ... ^ s_{lambda_P}.
// Each step takes one cycle, so the number of P > 3 steps per LW is Eq. (2).  With the
// default sizes the schedule has 1 + 4218 = 4219 steps.
//
// The step outputs (onebit, grid, pair_en, t, lam_min, sc, sel) come from registers and
// are valid during the step's cycle.  hit (from the decoder core) ends the search; while
// adv is low the controller holds its step (used when the output register is full).
// last is high during the final step of the schedule.  sel[q] is the one-hot sorted
// position of lambda_{q+4} (zero when the part is unused).  The ordering of the P > 3
// steps follows the nested sums of Eq. (2); skipping infeasible combinations in the
// same cycle is a choice of this design.
module controller
  import orbgrand_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned SW    = SW_DEF,
  parameter int unsigned LWMAX = LWMAX_DEF,
  parameter int unsigned PMAX  = PMAX_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 adv,
  input  logic                 hit,
  input  logic [SW-1:0]        s [N],
  input  logic [SW-1:0]        syn_hat,
  output logic                 busy,
  output logic                 last,
  output logic                 onebit,
  output logic                 grid,
  output logic                 pair_en,
  output logic [cw(LWMAX)-1:0] t,
  output logic [cw(LWMAX)-1:0] lam_min,
  output logic [SW-1:0]        sc,
  output logic [N-1:0]         sel [PMAX-3]
);

  localparam int unsigned TW = cw(LWMAX);
  localparam int unsigned NL = PMAX - 3;   // number of parts held by the controller

  typedef enum logic [1:0] {S_IDLE, S_ONE, S_GRID} state_t;

  state_t        state, state_n;
  logic [TW-1:0] lw, lw_n;
  logic [3:0]    p, p_n;                    // current partition size bound (3..PMAX)
  logic [TW-1:0] lam   [NL];                // lam[q] = lambda_{q+4}, 0 if unused
  logic [TW-1:0] lam_n [NL];
  logic [SW-1:0] sc_n;
  logic          done_n;

  // Can lambda_4.. with the given sum still be completed by 3 larger parts?
  function automatic logic feasible(input int lwv, input int l4, input int sum);
    return (lwv - sum) >= 3 * l4 + 6;
  endfunction

  // ---- next step -------------------------------------------------------------------
  always_comb begin
    int cand [NL];
    int sum;
    logic found;
    state_n = state;
    lw_n    = lw;
    p_n     = p;
    lam_n   = lam;
    done_n  = 1'b0;
    found   = 1'b0;
    sum     = 0;
    for (int q = 0; q < NL; q++) cand[q] = 0;

    case (state)
      S_IDLE: begin
        if (start) begin
          state_n = S_ONE;
          lw_n    = '0;
          p_n     = 4'd3;
          for (int q = 0; q < NL; q++) lam_n[q] = '0;
        end
      end
      S_ONE: begin
        if (LWMAX >= 3) begin
          state_n = S_GRID;
          lw_n    = TW'(3);
          p_n     = 4'd3;
        end else begin
          done_n  = 1'b1;
        end
      end
      default: begin
        // (a) increment lambda_{q+4} for the innermost q that stays feasible,
        //     resetting the inner parts to their smallest values.
        for (int q = 0; q < NL; q++) begin
          if (!found && (q + 4 <= int'(p))) begin
            for (int j = 0; j < NL; j++) cand[j] = int'(lam[j]);
            cand[q] = int'(lam[q]) + 1;
            for (int j = 0; j < q; j++) cand[j] = cand[q] + (q - j);
            sum = 0;
            for (int j = 0; j < NL; j++) sum += cand[j];
            if (feasible(int'(lw), cand[0], sum)) begin
              found = 1'b1;
              for (int j = 0; j < NL; j++) lam_n[j] = TW'(cand[j]);
            end
          end
        end
        // (b) next partition size, smallest parts (lambda_P = 1, ..., lambda_4 = P-3)
        if (!found && (int'(p) < int'(PMAX))) begin
          for (int j = 0; j < NL; j++) cand[j] = (j + 4 <= int'(p) + 1) ? (int'(p) + 1 - 3 - j) : 0;
          sum = 0;
          for (int j = 0; j < NL; j++) sum += cand[j];
          if (feasible(int'(lw), cand[0], sum)) begin
            found = 1'b1;
            p_n   = p + 4'd1;
            for (int j = 0; j < NL; j++) lam_n[j] = TW'(cand[j]);
          end
        end
        // (c) next logistic weight
        if (!found) begin
          if (int'(lw) < int'(LWMAX)) begin
            lw_n = lw + TW'(1);
            p_n  = 4'd3;
            for (int j = 0; j < NL; j++) lam_n[j] = '0;
          end else begin
            done_n = 1'b1;
          end
        end
      end
    endcase

    if (state != S_IDLE && (hit || done_n)) state_n = S_IDLE;

    // combined syndrome of the next step
    sc_n = syn_hat;
    for (int j = 0; j < NL; j++) begin
      if (lam_n[j] != '0) sc_n ^= s[int'(lam_n[j]) - 1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lw    <= '0;
      p     <= 4'd3;
      sc    <= '0;
      for (int q = 0; q < NL; q++) lam[q] <= '0;
    end else if (state == S_IDLE || adv) begin
      state <= state_n;
      lw    <= lw_n;
      p     <= p_n;
      lam   <= lam_n;
      sc    <= sc_n;
    end
  end

  // ---- step outputs ------------------------------------------------------------------
  always_comb begin
    int sum;
    sum = 0;
    for (int j = 0; j < NL; j++) sum += int'(lam[j]);
    busy    = (state != S_IDLE);
    onebit  = (state == S_ONE);
    grid    = (state == S_GRID);
    pair_en = (state == S_GRID) && (p == 4'd3);
    t       = TW'(int'(lw) - sum);
    lam_min = lam[0];
    last    = busy && done_n;
    for (int q = 0; q < NL; q++) begin
      sel[q] = '0;
      if (lam[q] != '0) sel[q][int'(lam[q]) - 1] = 1'b1;
    end
  end

endmodule
