// tb_index_mux: self-checking testbench of index_mux at its default size.
// ind is a random permutation; each of the P selects is a random one-hot vector or
// zero.  Expected: idx[p] = ind[position of the one], vld[p] = select not zero.
module tb_index_mux;
  import orbgrand_pkg::*;
  localparam int N = N_DEF, PMAX = PMAX_DEF, LOGN = $clog2(N);
  logic [LOGN-1:0] ind [N], idx [PMAX];
  logic [N-1:0] sel [PMAX];
  logic vld [PMAX];
  int pos [PMAX];
  int checks = 0, failures = 0;
  index_mux u_dut (.ind(ind), .sel(sel), .idx(idx), .vld(vld));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 300; trial++) begin
      for (int i = 0; i < N; i++) ind[i] = LOGN'(i);
      for (int i = N - 1; i > 0; i--) begin
        int j = int'($urandom % (i + 1));
        logic [LOGN-1:0] tmp = ind[i];
        ind[i] = ind[j]; ind[j] = tmp;
      end
      for (int p = 0; p < PMAX; p++) begin
        sel[p] = '0;
        pos[p] = ($urandom % 5 == 0) ? -1 : int'($urandom % N);
        if (trial < 2) pos[p] = (trial == 0) ? 0 : N - 1;
        if (pos[p] >= 0) sel[p][pos[p]] = 1'b1;
      end
      #1;
      for (int p = 0; p < PMAX; p++) begin
        checks++;
        if (vld[p] !== (pos[p] >= 0)) begin failures++; $display("FAIL vld %0d", p); end
        if (pos[p] >= 0) begin
          checks++;
          if (idx[p] !== ind[pos[p]]) begin failures++; $display("FAIL idx %0d", p); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
