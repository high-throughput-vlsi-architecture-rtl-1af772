// h_memory: storage for the parity-check matrix H of the code being decoded.
//
// Column i of H is the syndrome s_i = H * 1_i of a single error at bit i, so the
// memory is organised as N words of SW bits, one word per code bit.  A column is
// written through the write port (we/waddr/wcol) at the rising clock edge; all N
// columns are read in parallel and combinationally (col[i]), because the hard-decision
// syndrome unit and the sorter need every column at once.  Any H with up to SW rows
// can be loaded at any time, which makes the decoder code- and rate-agnostic; unused
// rows are loaded as zeros.  The memory is a register array with no reset: it must be
// loaded before the first frame.
module h_memory
  import orbgrand_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned SW = SW_DEF
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  logic [SW-1:0]        wcol,
  output logic [SW-1:0]        col [N]
);

  logic [SW-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wcol;
  end

  assign col = mem;

endmodule
