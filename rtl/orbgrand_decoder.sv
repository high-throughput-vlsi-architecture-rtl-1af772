// orbgrand_decoder: ORBGRAND soft-decision decoder for any binary linear (n,k) code.
//
// A frame is N channel LLRs in sign-magnitude form (bit Q-1 = sign, 1 meaning bit 1;
// bits Q-2..0 = |LLR|).  The decoder guesses the noise: it tests error patterns e in
// ascending logistic weight (sum of the reliability ranks of the flipped bits) until
// H * (yhat ^ e)^T = 0, then outputs c = yhat ^ e and u = c * G^-1.
//
// Data path (one frame at a time):
//   CHECK   1 cycle  H*yhat (hard_syndrome).  If zero, the frame is done in this cycle.
//                    The first sorter phase runs in the same cycle.
//   SORT    log2(N)-1 further cycles in the pipelined bitonic sorter, which also
//                    carries the H column of every bit (sorted one-bit-flip syndromes).
//   DECODE  one cycle per step of the controller schedule: 1 step for all 1-bit
//                    patterns, then per LW one step for sizes 2 and 3 and one per choice
//                    of lambda_4..lambda_P.  The decoder core tests a whole step at once.
// On a hit, the one-hot part positions go through the index multiplexers to the word
// generator and the result is registered.  If the schedule ends without a hit (LW_max
// reached) the frame is abandoned: c = yhat, ok = 0.  Worst case with the default sizes
// (N=128, LW_max=64, P_max=6): 1 + 6 + 4219 = 4226 cycles, the original architecture's figure.
//
// Interfaces: H is loaded column by column (h_we/h_addr/h_col, column = SW bits, unused
// rows zero) and G^-1 row by row (g_we/g_addr/g_row).  Frames enter with in_valid/
// in_ready and leave with out_valid/out_ready (valid/ready handshakes; data held while
// out_valid && !out_ready).  When the hard decision is already a codeword and the output
// register can take it, a new frame is accepted in the same cycle, so such frames flow at
// one per cycle.  out_cycles is the number of cycles from the CHECK cycle to the cycle
// that produced the result (1 for a frame that needs no correction), out_hw the number
// of flipped bits.  The handshakes, the LLR format and the abandonment output are
// choices of this design; the block structure follows the original block diagram.
module orbgrand_decoder
  import orbgrand_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned Q     = Q_DEF,
  parameter int unsigned SW    = SW_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned LWMAX = LWMAX_DEF,
  parameter int unsigned PMAX  = PMAX_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // parity-check matrix load
  input  logic                 h_we,
  input  logic [$clog2(N)-1:0] h_addr,
  input  logic [SW-1:0]        h_col,
  // G^-1 load
  input  logic                 g_we,
  input  logic [$clog2(N)-1:0] g_addr,
  input  logic [K-1:0]         g_row,
  // frame input
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [Q-1:0]         in_llr [N],
  // result output
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [K-1:0]         out_u,
  output logic [N-1:0]         out_c,
  output logic                 out_ok,
  output logic [3:0]           out_hw,
  output logic [31:0]          out_cycles
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned TW   = cw(LWMAX);

  typedef enum logic [1:0] {T_IDLE, T_CHECK, T_SORT, T_DECODE} tstate_t;

  tstate_t          state;
  logic [Q-1:0]     llr [N];
  logic [N-1:0]     yhat;
  logic [Q-2:0]     mag [N];
  logic [SW-1:0]    hcol [N];
  logic [SW-1:0]    syn, syn_hat;
  logic             syn_zero;
  logic [LOGN-1:0]  sort_cnt;
  logic [31:0]      cyc;
  logic             out_free, accept;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      yhat[i] = llr[i][Q-1];
      mag[i]  = llr[i][Q-2:0];
    end
  end

  // ---- blocks ------------------------------------------------------------------------
  h_memory #(.N(N), .SW(SW)) u_hmem (
    .clk(clk), .we(h_we), .waddr(h_addr), .wcol(h_col), .col(hcol));

  hard_syndrome #(.N(N), .SW(SW)) u_hsyn (
    .yhat(yhat), .col(hcol), .syn(syn), .zero(syn_zero));

  logic             srt_valid, srt_valid_next;
  logic [LOGN-1:0]  ind [N];
  logic [SW-1:0]    s_sorted [N];

  bitonic_sorter #(.N(N), .KW(Q-1), .PW(SW)) u_sort (
    .clk(clk), .rst_n(rst_n), .in_valid(state == T_CHECK), .key_in(mag), .pay_in(hcol),
    .out_valid(srt_valid), .out_valid_next(srt_valid_next), .ind(ind), .pay_out(s_sorted));

  logic             ctl_start, ctl_busy, ctl_last, onebit, grid, pair_en, hit;
  logic [TW-1:0]    t, lam_min;
  logic [SW-1:0]    sc;
  logic [N-1:0]     sel_ctl [PMAX-3];
  logic [N-1:0]     sel_core [3];
  logic [N-1:0]     sel [PMAX];

  controller #(.N(N), .SW(SW), .LWMAX(LWMAX), .PMAX(PMAX)) u_ctl (
    .clk(clk), .rst_n(rst_n), .start(ctl_start), .adv(out_free), .hit(hit),
    .s(s_sorted), .syn_hat(syn_hat), .busy(ctl_busy), .last(ctl_last),
    .onebit(onebit), .grid(grid), .pair_en(pair_en), .t(t), .lam_min(lam_min),
    .sc(sc), .sel(sel_ctl));

  decoder_core #(.N(N), .SW(SW), .LWMAX(LWMAX)) u_core (
    .s(s_sorted), .onebit(onebit), .grid(grid), .pair_en(pair_en), .t(t),
    .lam_min(lam_min), .sc(sc), .hit(hit), .sel(sel_core));

  always_comb begin
    for (int p = 0; p < PMAX; p++) begin
      if (p < 3) sel[p] = sel_core[p];
      else       sel[p] = sel_ctl[(p >= 3) ? p - 3 : 0];
      if (!(state == T_DECODE && hit)) sel[p] = '0;
    end
  end

  logic [LOGN-1:0]  idx [PMAX];
  logic             vld [PMAX];
  logic [N-1:0]     wg_c;
  logic [K-1:0]     wg_u;

  index_mux #(.N(N), .PMAX(PMAX)) u_mux (.ind(ind), .sel(sel), .idx(idx), .vld(vld));

  word_generator #(.N(N), .K(K), .PMAX(PMAX)) u_wgen (
    .clk(clk), .g_we(g_we), .g_addr(g_addr), .g_row(g_row), .yhat(yhat),
    .idx(idx), .vld(vld), .c(wg_c), .u(wg_u));

  // ---- sequencing ------------------------------------------------------------------------
  assign out_free  = !out_valid || out_ready;
  assign in_ready  = out_free && ((state == T_IDLE) || (state == T_CHECK && syn_zero));
  assign accept    = in_valid && in_ready;
  assign ctl_start = (state == T_SORT) && (int'(sort_cnt) == int'(LOGN));

  logic finish;   // result written this cycle
  assign finish = out_free && ((state == T_CHECK && syn_zero) ||
                               (state == T_DECODE && ctl_busy && (hit || ctl_last)));

  logic [3:0] out_hw_n;
  always_comb begin
    out_hw_n = '0;
    for (int p = 0; p < PMAX; p++) out_hw_n += {3'b000, vld[p]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      sort_cnt   <= '0;
      cyc        <= '0;
      syn_hat    <= '0;
      out_valid  <= 1'b0;
      out_u      <= '0;
      out_c      <= '0;
      out_ok     <= 1'b0;
      out_hw     <= '0;
      out_cycles <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (finish) begin
        out_valid  <= 1'b1;
        out_u      <= wg_u;
        out_c      <= wg_c;
        out_ok     <= (syn_zero && state == T_CHECK) || hit;
        out_hw     <= out_hw_n;
        out_cycles <= cyc + 32'd1;
      end
      // back-pressure stalls of the output are not counted as decoding cycles
      if (out_free || state == T_SORT || (state == T_CHECK && !syn_zero)) cyc <= cyc + 32'd1;
      case (state)
        T_IDLE: begin
          cyc <= '0;
          if (accept) state <= T_CHECK;
        end
        T_CHECK: begin
          if (syn_zero) begin
            if (finish) begin
              state <= accept ? T_CHECK : T_IDLE;
              cyc   <= '0;
            end
          end else begin
            syn_hat  <= syn;
            sort_cnt <= LOGN'(2);
            state    <= (LOGN > 1) ? T_SORT : T_DECODE;
          end
        end
        T_SORT: begin
          sort_cnt <= sort_cnt + LOGN'(1);
          if (ctl_start) state <= T_DECODE;
        end
        default: begin
          if (finish) state <= T_IDLE;
        end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (accept) llr <= in_llr;
  end

  // The input handshake never takes a frame while one is being decoded.
  a_no_accept_busy: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (state == T_IDLE || state == T_CHECK));
  // The controller starts exactly when the sorted syndromes reach the sorter outputs.
  a_sort_sync: assert property (@(posedge clk) disable iff (!rst_n)
    ctl_start |-> srt_valid_next);
  a_sort_ready: assert property (@(posedge clk) disable iff (!rst_n)
    ctl_start |=> srt_valid);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_c));

endmodule
