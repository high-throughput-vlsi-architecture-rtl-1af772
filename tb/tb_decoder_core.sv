// tb_decoder_core: self-checking testbench of decoder_core at reduced size
// (N = 32, 16-bit syndromes, LW_max = 24).
// Random sorted syndromes; each trial picks a step kind, a target sum t, a lower bound
// lam_min and, most of the time, a partition that satisfies the step's rules, whose
// syndromes are XORed into sc so that it must be found.  The expected result is the
// first satisfying pattern in the core's priority order, found by enumerating integer
// partitions directly: 1-bit patterns by rank; else 2-part partitions (lambda_2
// ascending) when pair_en, then 3-part ones with lambda_3 > lam_min (lambda_3, then
// lambda_2 ascending).  hit and the three one-hot selects are compared.
module tb_decoder_core;
  import orbgrand_pkg::*;
  localparam int N = 32, SW = 16, LWMAX = 24, TW = cw(LWMAX);
  logic [SW-1:0] s [N], sc;
  logic onebit, grid, pair_en, hit;
  logic [TW-1:0] t, lam_min;
  logic [N-1:0] sel [3];
  int checks = 0, failures = 0;
  int n_one = 0, n_pair = 0, n_tri = 0, n_miss = 0;

  decoder_core #(.N(N), .SW(SW), .LWMAX(LWMAX)) u_dut (.s(s), .onebit(onebit), .grid(grid),
    .pair_en(pair_en), .t(t), .lam_min(lam_min), .sc(sc), .hit(hit), .sel(sel));

  function automatic logic [SW-1:0] sy(input int l);
    return (l > 0) ? s[l-1] : '0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 3000; trial++) begin
      int tv, lm, e1, e2, e3;
      bit found;
      logic [N-1:0] es [3];
      for (int i = 0; i < N; i++) s[i] = SW'($urandom);
      onebit  = (trial % 6 == 0);
      grid    = !onebit;
      tv      = 3 + int'($urandom % (LWMAX - 2));
      lm      = (trial % 3 == 0 && tv >= 10) ? int'($urandom % ((tv - 6) / 4 + 1)) : 0;
      pair_en = grid && (lm == 0) && ($urandom % 4 != 0);
      t       = TW'(tv);
      lam_min = TW'(lm);
      sc      = SW'($urandom);
      // plant a pattern
      if ($urandom % 5 != 0) begin
        if (onebit) sc = sy(1 + int'($urandom % LWMAX));
        else begin
          int a, b, c;
          a = 0; b = 0; c = 0;
          if (pair_en && $urandom % 2 == 0) begin
            b = 1 + int'($urandom % ((tv - 1) / 2));
            a = tv - b;
            if (a > b) sc = sy(a) ^ sy(b);
          end else begin
            for (int tries = 0; tries < 20; tries++) begin
              // sometimes plant a forbidden pattern with lambda_3 = lam_min
              c = (lm > 0 && $urandom % 3 == 0) ? lm : lm + 1 + int'($urandom % 8);
              b = c + 1 + int'($urandom % 8);
              a = tv - b - c;
              if (a > b) begin sc = sy(a) ^ sy(b) ^ sy(c); break; end
            end
          end
        end
      end
      // expected
      found = 0; e1 = 0; e2 = 0; e3 = 0;
      if (onebit) begin
        for (int i = 1; i <= LWMAX && !found; i++)
          if ((sc ^ sy(i)) == '0) begin found = 1; e1 = i; end
      end else begin
        if (pair_en)
          for (int b = 1; tv - b > b && !found; b++)
            if ((sc ^ sy(tv - b) ^ sy(b)) == '0) begin found = 1; e1 = tv - b; e2 = b; end
        for (int c = lm + 1; c < tv && !found; c++)
          for (int b = c + 1; tv - c - b > b && !found; b++)
            if ((sc ^ sy(tv - c - b) ^ sy(b) ^ sy(c)) == '0) begin
              found = 1; e1 = tv - c - b; e2 = b; e3 = c;
            end
      end
      for (int p = 0; p < 3; p++) es[p] = '0;
      if (e1 > 0) es[0][e1-1] = 1'b1;
      if (e2 > 0) es[1][e2-1] = 1'b1;
      if (e3 > 0) es[2][e3-1] = 1'b1;
      if (!found) n_miss++; else if (e3 > 0) n_tri++; else if (e2 > 0) n_pair++; else n_one++;
      #1;
      checks++;
      if (hit !== found) begin
        failures++;
        if (failures < 10) $display("FAIL hit trial %0d t=%0d lm=%0d exp=%0d", trial, tv, lm, found);
      end
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (sel[p] !== es[p]) begin
          failures++;
          if (failures < 10) $display("FAIL sel%0d trial %0d exp %0d/%0d/%0d", p, trial, e1, e2, e3);
        end
      end
    end
    $display("cases: one-bit=%0d pair=%0d triple=%0d none=%0d", n_one, n_pair, n_tri, n_miss);
    checks++;
    if (n_one == 0 || n_pair == 0 || n_tri == 0 || n_miss == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
