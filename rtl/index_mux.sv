// index_mux: the P n:1 multiplexers between the sorter and the word generator.
//
// The permutation vector ind (ind[j] = bit index of the (j+1)-th least reliable bit)
// is translated back to bit positions: for each part p of the winning pattern, sel[p]
// is a one-hot vector over the N sorted positions and idx[p] = ind[position].  vld[p]
// is high when sel[p] selects something (the part is used).  The multiplexers are
// AND-OR trees driven by one-hot selects, as the decoder core and the controller
// deliver P x n one-hot lines; the one-hot form is read from the P x n bus width of the
// original block diagram.  Combinational.
module index_mux
  import orbgrand_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned PMAX = PMAX_DEF
) (
  input  logic [$clog2(N)-1:0] ind [N],
  input  logic [N-1:0]         sel [PMAX],
  output logic [$clog2(N)-1:0] idx [PMAX],
  output logic                 vld [PMAX]
);

  always_comb begin
    for (int p = 0; p < PMAX; p++) begin
      idx[p] = '0;
      for (int j = 0; j < N; j++) begin
        idx[p] |= ind[j] & {$clog2(N){sel[p][j]}};
      end
      vld[p] = |sel[p];
    end
  end

endmodule
