// word_generator: builds the decoded codeword and recovers the message.
//
// The error pattern e has a one at bit idx[p] for every used part p (vld[p]); the
// decoded codeword is c = yhat ^ e.  The message is u = c * G^-1 (Algorithm 1, line 8),
// computed as the XOR of the rows of G^-1 at the positions where c is 1.  G^-1 (N rows
// of K bits) is held in a register array written one row per cycle through
// g_we/g_addr/g_row, like the H memory; for a systematic code it simply selects the
// information bits.  The original block diagram shows the word generator producing
// the k message bits but does not show where G^-1 is kept: this storage is a choice of
// this design.  c and u are combinational in idx/vld/yhat.
module word_generator
  import orbgrand_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned K    = K_DEF,
  parameter int unsigned PMAX = PMAX_DEF
) (
  input  logic                 clk,
  input  logic                 g_we,
  input  logic [$clog2(N)-1:0] g_addr,
  input  logic [K-1:0]         g_row,
  input  logic [N-1:0]         yhat,
  input  logic [$clog2(N)-1:0] idx [PMAX],
  input  logic                 vld [PMAX],
  output logic [N-1:0]         c,
  output logic [K-1:0]         u
);

  logic [K-1:0] ginv [N];

  always_ff @(posedge clk) begin
    if (g_we) ginv[g_addr] <= g_row;
  end

  always_comb begin
    c = yhat;
    for (int p = 0; p < PMAX; p++) begin
      if (vld[p]) c[idx[p]] = ~yhat[idx[p]];
    end
    u = '0;
    for (int i = 0; i < N; i++) begin
      if (c[i]) u ^= ginv[i];
    end
  end

endmodule
