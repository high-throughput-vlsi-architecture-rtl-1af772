// tb_controller: self-checking testbench of the controller at its default size
// (N = 128, LW_max = 64, P_max = 6).
// The expected schedule is built with nested loops over LW, partition size and the
// fixed parts lambda_P (slowest) .. lambda_4 (fastest), keeping the combinations for
// which LW - sum >= 3*lambda_4 + 6.  Run 1 never reports a hit: every step's outputs
// (kind, t, lam_min, pair_en, sc, one-hot selects) must match the list, last must be
// high only on the final step, and the number of steps must be 4219 (with the 7 cycles
// of the check and the sorter: the 4226-cycle worst case).  adv is dropped for a few
// cycles in the middle and the step must hold.  Run 2 reports a hit at step 300 and the
// controller must go idle.
module tb_controller;
  import orbgrand_pkg::*;
  localparam int N = N_DEF, SW = SW_DEF, LWMAX = LWMAX_DEF, PMAX = PMAX_DEF, TW = cw(LWMAX);
  localparam int NL = PMAX - 3;
  logic clk = 0, rst_n = 0, start = 0, adv = 1, hit = 0;
  logic [SW-1:0] s [N], syn_hat, sc;
  logic busy, last, onebit, grid, pair_en;
  logic [TW-1:0] t, lam_min;
  logic [N-1:0] sel [NL];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  controller u_dut (.clk(clk), .rst_n(rst_n), .start(start), .adv(adv), .hit(hit), .s(s),
    .syn_hat(syn_hat), .busy(busy), .last(last), .onebit(onebit), .grid(grid),
    .pair_en(pair_en), .t(t), .lam_min(lam_min), .sc(sc), .sel(sel));

  typedef struct { bit one; int lw; int l [3]; } step_t;
  step_t exp_steps [$];

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [SW-1:0] sy(input int l);
    return (l > 0) ? s[l-1] : '0;
  endfunction

  task automatic check_step(input step_t e, input int k);
    int sum;
    logic [N-1:0] es;
    sum = e.l[0] + e.l[1] + e.l[2];
    chk(busy, "busy");
    chk(onebit == e.one, $sformatf("kind at step %0d", k));
    chk(grid == !e.one, "grid");
    if (!e.one) begin
      chk(int'(t) == e.lw - sum, $sformatf("t at step %0d: %0d vs %0d", k, t, e.lw - sum));
      chk(int'(lam_min) == e.l[0], "lam_min");
      chk(pair_en == (sum == 0), "pair_en");
    end
    chk(sc == (syn_hat ^ sy(e.l[0]) ^ sy(e.l[1]) ^ sy(e.l[2])), "sc");
    for (int q = 0; q < NL; q++) begin
      es = '0;
      if (q < 3 && e.l[q] > 0) es[e.l[q]-1] = 1'b1;
      chk(sel[q] == es, "sel");
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    step_t e;
    int k;
    e.one = 1; e.lw = 0; e.l = '{0, 0, 0};
    exp_steps.push_back(e);
    for (int lw = 3; lw <= LWMAX; lw++) begin
      e.one = 0; e.lw = lw; e.l = '{0, 0, 0};
      exp_steps.push_back(e);
      for (int p = 4; p <= PMAX; p++)
        for (int l6 = (p >= 6 ? 1 : 0); l6 <= (p >= 6 ? lw : 0); l6++)
          for (int l5 = (p >= 5 ? l6 + 1 : 0); l5 <= (p >= 5 ? lw : 0); l5++)
            for (int l4 = l5 + 1; l4 <= lw; l4++)
              if (lw - (l4 + l5 + l6) >= 3 * l4 + 6) begin
                e.l = '{l4, l5, l6};
                exp_steps.push_back(e);
              end
    end
    chk(exp_steps.size() == 4219, $sformatf("reference schedule length %0d", exp_steps.size()));

    for (int i = 0; i < N; i++) s[i] = SW'($urandom);
    syn_hat = SW'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy, "idle after reset");
    // run 1: full schedule
    start = 1;
    @(negedge clk);
    start = 0;
    k = 0;
    while (busy) begin
      check_step(exp_steps[k], k);
      chk(last == (k == exp_steps.size() - 1), $sformatf("last at step %0d", k));
      if (k == 1000) begin
        adv = 0;
        repeat (3) begin @(negedge clk); check_step(exp_steps[k], k); end
        adv = 1;
      end
      k++;
      @(negedge clk);
    end
    chk(k == 4219, $sformatf("steps %0d, expected 4219", k));
    // run 2: hit at step 300
    start = 1;
    @(negedge clk);
    start = 0;
    for (k = 0; k < 300; k++) @(negedge clk);
    check_step(exp_steps[300], 300);
    hit = 1;
    @(negedge clk);
    hit = 0;
    chk(!busy, "idle after hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
