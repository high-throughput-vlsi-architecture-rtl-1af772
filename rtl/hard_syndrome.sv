// hard_syndrome: the H * yhat^T unit.
//
// The syndrome of the hard-decided word yhat is the XOR of the columns of H at the
// positions where yhat is 1.  The unit is purely combinational: syn is valid in the
// same cycle as yhat, and zero is high when yhat already satisfies every parity check
// (the decoder then finishes without sorting).  The resulting syndrome is also the
// starting value of the combined syndrome s_c used by the controller.
module hard_syndrome
  import orbgrand_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned SW = SW_DEF
) (
  input  logic [N-1:0]  yhat,
  input  logic [SW-1:0] col [N],
  output logic [SW-1:0] syn,
  output logic          zero
);

  always_comb begin
    syn = '0;
    for (int i = 0; i < N; i++) begin
      if (yhat[i]) syn ^= col[i];
    end
  end

  assign zero = (syn == '0);

endmodule
