// tb_bitonic_sorter: self-checking testbench of bitonic_sorter at its default size
// (128 elements, 4-bit keys, 32-bit payload).
// Random key sets (including many ties) are sent back to back and with gaps.  For each
// output set: the keys must be ascending with ties in ascending bit index, ind must be
// a permutation, the payload must follow its element, and the set must appear exactly
// log2(N) cycles after it entered (out_valid_next one cycle earlier).  Between sets the
// outputs must hold.
module tb_bitonic_sorter;
  import orbgrand_pkg::*;
  localparam int N = N_DEF, KW = Q_DEF - 1, PW = SW_DEF, LOGN = $clog2(N);
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, out_valid_next;
  logic [KW-1:0] key_in [N];
  logic [PW-1:0] pay_in [N], pay_out [N];
  logic [LOGN-1:0] ind [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bitonic_sorter u_dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .key_in(key_in),
    .pay_in(pay_in), .out_valid(out_valid), .out_valid_next(out_valid_next), .ind(ind),
    .pay_out(pay_out));

  typedef struct { int key [N]; int pay [N]; int t_in; } set_t;
  set_t q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    set_t s;
    for (int i = 0; i < N; i++) begin key_in[i] = '0; pay_in[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      if (n % 5 == 4) begin in_valid = 0; @(negedge clk); @(negedge clk); end
      for (int i = 0; i < N; i++) begin
        s.key[i] = (n % 3 == 0) ? int'($urandom % 3) : int'($urandom % (1 << KW));
        s.pay[i] = int'($urandom);
        key_in[i] = KW'(s.key[i]);
        pay_in[i] = PW'(s.pay[i]);
      end
      s.t_in = cyc;
      in_valid = 1;
      q.push_back(s);
    end
    @(negedge clk);
    in_valid = 0;
  end

  // monitor
  initial begin
    int got = 0;
    bit seen [N];
    logic [LOGN-1:0] ind_hold [N];
    bit nv_prev;
    nv_prev = 0;
    @(posedge rst_n);
    while (got < 40) begin
      @(negedge clk);
      chk(out_valid == nv_prev, "out_valid_next one cycle ahead");
      nv_prev = out_valid_next;
      if (out_valid) begin
        set_t s;
        s = q.pop_front();
        got++;
        chk(cyc - s.t_in == LOGN, $sformatf("latency %0d", cyc - s.t_in));
        for (int i = 0; i < N; i++) seen[i] = 0;
        for (int j = 0; j < N; j++) begin
          chk(!seen[ind[j]], "ind is a permutation");
          seen[ind[j]] = 1;
          chk(pay_out[j] == PW'(s.pay[ind[j]]), "payload follows element");
          if (j > 0)
            chk((s.key[ind[j-1]] < s.key[ind[j]]) ||
                (s.key[ind[j-1]] == s.key[ind[j]] && ind[j-1] < ind[j]), "ascending order");
        end
        ind_hold = ind;
      end else if (got > 0) begin
        bit same;
        same = 1;
        for (int j = 0; j < N; j++) if (ind[j] != ind_hold[j]) same = 0;
        chk(same, "outputs hold between sets");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
