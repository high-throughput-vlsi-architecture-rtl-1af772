// decoder_core: the shift registers, XOR gate arrays and 2D priority encoder that test
// a whole family of error patterns in one clock cycle (one time-step).
//
// Inputs are the sorted one-bit-flip syndromes s[0..N-1] (s[j] = s_{j+1}, the syndrome
// of the bit with the (j+1)-th smallest |LLR|) and, from the controller, the combined
// syndrome sc (hard-decision syndrome XOR the syndromes of the parts lambda_4..lambda_P
// already fixed), the target sum t, the smallest allowed lambda_3 minus one (lam_min =
// lambda_4, 0 when no part is fixed) and two step kinds:
//
//  * onebit: sc ^ s_i is tested for every i in 1..min(LW_max, N) (all 1-bit patterns).
//  * grid:   every distinct partition t = lambda_1 + lambda_2 (+ lambda_3) is tested.
//    Shift register 2 holds s_1..s_L at index i, shift register 3 holds
//    s_1..s_{lambda_3^max}, and shift register 1 holds s_{t-i} at index i, i.e. it is a
//    view of the sorted syndromes shifted by t (the shifting value chosen by the
//    controller).  Row r of the XOR array is the bus of lambda_3 = r (row 0 tests the
//    2-part partitions, only when pair_en is high); column c of row r combines index
//    r+1+c of register 2 (lambda_2) with index 2r+1+c of register 1
//    (lambda_1 = t - 2r - 1 - c), so a cell is a real partition when lambda_1 > lambda_2.
//    Cells with lambda_3 <= lam_min are disabled, so the parts stay strictly decreasing.
//
// A cell whose XOR is all zero satisfies every parity check.  The 2D priority encoder
// takes the lowest row, then the lowest column, among the hits; the one-bit step takes
// the lowest i.  sel[0..2] are the one-hot sorted positions (bit j = position j+1) of
// lambda_1..lambda_3 of the winning pattern (all-zero for unused parts); hit is high when
// any pattern of the step satisfies H.  The core is combinational: one step per cycle.
//
// The sizes (2*(lambda_3^max+1) syndromes in registers 1 and 2, lambda_3^max in
// register 3, lambda_3^max+1 buses) follow the original architecture.  Building register 1
// as a shifted view rather than as physically shifted flops, and the priority order
// inside a step, are choices of this design.
module decoder_core
  import orbgrand_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned SW    = SW_DEF,
  parameter int unsigned LWMAX = LWMAX_DEF
) (
  input  logic [SW-1:0]          s [N],
  input  logic                   onebit,
  input  logic                   grid,
  input  logic                   pair_en,
  input  logic [cw(LWMAX)-1:0]   t,
  input  logic [cw(LWMAX)-1:0]   lam_min,
  input  logic [SW-1:0]          sc,
  output logic                   hit,
  output logic [N-1:0]           sel [3]
);

  localparam int unsigned L3   = lam3_max(LWMAX);        // rows 1..L3 (lambda_3)
  localparam int unsigned L12  = sr12_len(LWMAX);        // length of registers 1, 2
  localparam int unsigned NC   = L12;                    // columns per row
  localparam int unsigned ONE  = (LWMAX < N) ? LWMAX : N; // one-bit patterns per step

  // ---- shift registers -------------------------------------------------------------
  logic [SW-1:0] sr1 [1:L12];   // sr1[i] = s_{t-i}
  logic [SW-1:0] sr2 [1:L12];   // sr2[i] = s_i
  logic [SW-1:0] sr3 [1:L3];    // sr3[i] = s_i

  always_comb begin
    for (int i = 1; i <= L12; i++) begin
      sr2[i] = s[i-1];
      sr1[i] = (int'(t) > i) ? s[int'(t) - i - 1] : '0;
    end
    for (int i = 1; i <= L3; i++) sr3[i] = s[i-1];
  end

  // ---- XOR gate arrays (one bus per row) -------------------------------------------
  logic [NC-1:0] cell_ok [L3+1];

  for (genvar r = 0; r <= L3; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      // A cell exists if it can hold a valid partition for some t <= LWMAX.
      if ((2*r + 1 + c <= L12) && (r + 1 + c <= L12) && (3*r + 2*c + 3 <= LWMAX)) begin : g_cell
        logic [SW-1:0] x;
        logic          en;
        always_comb begin
          x = sc ^ sr1[2*r+1+c] ^ sr2[r+1+c];
          if (r > 0) x = x ^ sr3[(r > 0) ? r : 1];
          en = grid && (int'(t) > 3*r + 2 + 2*c) && (int'(t) - (2*r + 1 + c) <= N)
                    && ((r == 0) ? pair_en : (r > int'(lam_min)));
        end
        assign cell_ok[r][c] = en && (x == '0);
      end else begin : g_none
        assign cell_ok[r][c] = 1'b0;
      end
    end
  end

  // ---- one-bit XOR array -------------------------------------------------------------
  logic [ONE-1:0] one_ok;
  for (genvar i = 0; i < ONE; i++) begin : g_one
    assign one_ok[i] = onebit && ((sc ^ s[i]) == '0);
  end

  // ---- 2D priority encoder -----------------------------------------------------------
  always_comb begin
    logic found;
    int   l1, l2, l3;
    found = 1'b0;
    l1 = 0; l2 = 0; l3 = 0;
    for (int i = 0; i < ONE; i++) begin
      if (!found && one_ok[i]) begin
        found = 1'b1;
        l1    = i + 1;
      end
    end
    for (int r = 0; r <= L3; r++) begin
      for (int c = 0; c < NC; c++) begin
        if (!found && cell_ok[r][c]) begin
          found = 1'b1;
          l3    = r;
          l2    = r + 1 + c;
          l1    = int'(t) - 2*r - 1 - c;
        end
      end
    end
    hit = found;
    for (int p = 0; p < 3; p++) sel[p] = '0;
    if (found) begin
      sel[0][l1-1] = 1'b1;
      if (l2 > 0) sel[1][l2-1] = 1'b1;
      if (l3 > 0) sel[2][l3-1] = 1'b1;
    end
  end

endmodule
