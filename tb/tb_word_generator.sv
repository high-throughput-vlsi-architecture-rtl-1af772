// tb_word_generator: self-checking testbench of word_generator at its default size.
// Loads a random G^-1, then applies random hard decisions and 0..6 distinct flip
// positions.  Expected c flips exactly those bits; expected u is computed column by
// column as the parity of c ANDed with column j of G^-1.
module tb_word_generator;
  import orbgrand_pkg::*;
  localparam int N = N_DEF, K = K_DEF, PMAX = PMAX_DEF, LOGN = $clog2(N);
  logic clk = 0, g_we = 0;
  logic [LOGN-1:0] g_addr = '0, idx [PMAX];
  logic [K-1:0] g_row = '0, u, model [N], exp_u;
  logic [N-1:0] yhat = '0, c, exp_c;
  logic vld [PMAX];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  word_generator u_dut (.clk(clk), .g_we(g_we), .g_addr(g_addr), .g_row(g_row),
    .yhat(yhat), .idx(idx), .vld(vld), .c(c), .u(u));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < PMAX; p++) begin idx[p] = '0; vld[p] = 0; end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      g_we = 1; g_addr = LOGN'(i);
      for (int w = 0; w < K; w += 32) g_row[w +: 32] = $urandom;
      model[i] = g_row;
    end
    @(negedge clk); g_we = 0;
    for (int trial = 0; trial < 300; trial++) begin
      int nf = trial % (PMAX + 1);
      for (int w = 0; w < N; w += 32) yhat[w +: 32] = $urandom;
      exp_c = yhat;
      for (int p = 0; p < PMAX; p++) begin
        vld[p] = (p < nf);
        idx[p] = '0;
        if (p < nf) begin
          logic [LOGN-1:0] b;
          do b = LOGN'($urandom % N); while (exp_c[b] != yhat[b]);
          idx[p] = b;
          exp_c[b] = ~yhat[b];
        end
      end
      for (int j = 0; j < K; j++) begin
        bit x;
        x = 0;
        for (int i = 0; i < N; i++) x ^= exp_c[i] & model[i][j];
        exp_u[j] = x;
      end
      #1;
      checks++;
      if (c !== exp_c) begin failures++; $display("FAIL c trial %0d", trial); end
      checks++;
      if (u !== exp_u) begin failures++; $display("FAIL u trial %0d", trial); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
