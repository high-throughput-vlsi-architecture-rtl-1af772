// bitonic_sorter: pipelined Batcher bitonic sorter for the LLR magnitudes.
//
// The N magnitudes |y_i| (KW bits each) are sorted in ascending order.  Each element
// carries its bit index i and a payload of PW bits (the syndrome s_i = column i of H),
// so that the outputs are the permutation vector ind and the sorted one-bit-flip
// syndromes.  The network has log2(N) merge phases; phase k merges bitonic sequences of
// length 2^k with k compare-exchange layers.  One pipeline register follows each phase,
// so the sorter has log2(N) pipeline stages and a latency of log2(N) cycles, as in the
// original architecture.  Ties in magnitude are broken by the bit index (smaller index
// first); this makes the order, and hence the decoder output, deterministic - that
// tie rule is a choice of this design.
//
// Timing: a set of inputs is taken when in_valid is high.  A stage register loads only
// when its input is valid, so after the last valid set has passed, the outputs hold
// their value until a new set arrives.  out_valid is high for one cycle when a new
// sorted set appears at the outputs; out_valid_next is high the cycle before.
module bitonic_sorter
  import orbgrand_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned KW = Q_DEF - 1,
  parameter int unsigned PW = SW_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [KW-1:0]        key_in [N],
  input  logic [PW-1:0]        pay_in [N],
  output logic                 out_valid,
  output logic                 out_valid_next,
  output logic [$clog2(N)-1:0] ind [N],
  output logic [PW-1:0]        pay_out [N]
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned IW   = LOGN;

  typedef struct packed {
    logic [KW-1:0] key;
    logic [IW-1:0] idx;
    logic [PW-1:0] pay;
  } elem_t;

  elem_t stg [LOGN+1][N];   // stg[0]: inputs, stg[k]: register after phase k
  logic  vld [LOGN+1];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      stg[0][i].key = key_in[i];
      stg[0][i].idx = IW'(i);
      stg[0][i].pay = pay_in[i];
    end
  end
  assign vld[0] = in_valid;

  for (genvar k = 1; k <= LOGN; k++) begin : g_phase
    elem_t net [N];

    // Merge phase k: layers j = k-1 .. 0 compare elements i and i^(2^j).
    // Blocks of 2^(k+1) elements alternate ascending / descending order.
    always_comb begin
      elem_t a, b;
      a   = '0;
      b   = '0;
      net = stg[k-1];
      for (int j = k - 1; j >= 0; j--) begin
        for (int i = 0; i < N; i++) begin
          if (((i >> j) & 1) == 0) begin
            a = net[i];
            b = net[i + (1 << j)];
            if ((({a.key, a.idx} > {b.key, b.idx}) ? 1'b1 : 1'b0) == (((i >> k) & 1) == 0)) begin
              net[i]            = b;
              net[i + (1 << j)] = a;
            end
          end
        end
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[k] <= 1'b0;
      else        vld[k] <= vld[k-1];
    end

    always_ff @(posedge clk) begin
      if (vld[k-1]) stg[k] <= net;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      ind[i]     = stg[LOGN][i].idx;
      pay_out[i] = stg[LOGN][i].pay;
    end
  end

  assign out_valid      = vld[LOGN];
  assign out_valid_next = vld[LOGN-1];

endmodule
