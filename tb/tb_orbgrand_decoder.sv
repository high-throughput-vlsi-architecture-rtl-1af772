// tb_orbgrand_decoder: end-to-end self-checking testbench of orbgrand_decoder at reduced sizes.
//
// A random systematic code is built: H = [A | I] with R parity rows, so that a codeword
// is (m, A*m) and G^-1 just selects the first N-R bits.  H and G^-1 are loaded through
// the load ports, then frames are sent through the valid/ready handshake while the
// output side randomly deasserts out_ready.  Each frame is a codeword with BPSK-like
// sign-magnitude LLRs in which 0..6 bits of low magnitude are flipped, or (one frame in
// eight) many bits of any magnitude, which usually makes the decoder give up at LW_max.
// Every result (codeword, message, success flag, number of flips, cycle count) is
// compared with orbgrand_ref_pkg::ref_decode.  The testbench also counts how often each
// mechanism occurred - hard-decision hit, 1/2/3-bit hits in the core, hits that need the
// controller's fixed parts (4..6 bits), abandonment, output back-pressure, and frames
// accepted in back-to-back cycles - and counts a failure for any that never occurred.
module tb_orbgrand_decoder;
  import orbgrand_pkg::*;
  import orbgrand_ref_pkg::*;

  localparam int N = 32, Q = 5, SW = 16, K = 32, LWMAX = 24, PMAX = 6;
  localparam int R        = 16;           // parity rows of the test code
  localparam int NFRAMES  = 600;
  localparam int WATCHDOG = 600 * 400 + 10000;
  localparam int KK     = N - R;          // message length of the test code
  localparam int LOGN   = $clog2(N);

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 h_we = 1'b0, g_we = 1'b0;
  logic [LOGN-1:0]      h_addr = '0, g_addr = '0;
  logic [SW-1:0]        h_col = '0;
  logic [K-1:0]         g_row = '0;
  logic                 in_valid = 1'b0, in_ready;
  logic [Q-1:0]         in_llr [N];
  logic                 out_valid, out_ready = 1'b0;
  logic [K-1:0]         out_u;
  logic [N-1:0]         out_c;
  logic                 out_ok;
  logic [3:0]           out_hw;
  logic [31:0]          out_cycles;

  always #5 clk = ~clk;

  orbgrand_decoder #(.N(N), .Q(Q), .SW(SW), .K(K), .LWMAX(LWMAX), .PMAX(PMAX)) u_dut (
    .clk(clk), .rst_n(rst_n), .h_we(h_we), .h_addr(h_addr), .h_col(h_col),
    .g_we(g_we), .g_addr(g_addr), .g_row(g_row), .in_valid(in_valid), .in_ready(in_ready),
    .in_llr(in_llr), .out_valid(out_valid), .out_ready(out_ready), .out_u(out_u),
    .out_c(out_c), .out_ok(out_ok), .out_hw(out_hw), .out_cycles(out_cycles));

  int checks = 0, failures = 0;
  int n_hd = 0, n_abandon = 0, n_stall = 0, n_b2b = 0;
  int n_hw [7] = '{default: 0};

  longint unsigned hcol [];
  ref_result_t     expq [$];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Build one frame of the given kind: 0..6 low-reliability errors, 7 = heavy noise.
  task automatic make_frame(input int kind, output bit sgn [], output int mag []);
    bit m [];
    sgn = new [N];
    mag = new [N];
    m   = new [N];
    for (int i = 0; i < KK; i++) m[i] = bit'($urandom % 2);
    for (int r = 0; r < R; r++) begin
      bit b = 0;
      for (int i = 0; i < KK; i++) if (m[i] && hcol[i][r]) b = !b;
      m[KK + r] = b;
    end
    for (int i = 0; i < N; i++) begin
      sgn[i] = m[i];
      mag[i] = ($urandom % 8 == 0) ? int'($urandom % 4) : 4 + int'($urandom % 12);
    end
    if (kind < 7) begin
      int placed = 0;
      while (placed < kind) begin
        int b = int'($urandom % N);
        if (sgn[b] == m[b]) begin
          sgn[b] = !m[b];
          mag[b] = int'($urandom % 4);
          placed++;
        end
      end
    end else begin
      for (int e = 0; e < 14; e++) begin
        int b = int'($urandom % N);
        sgn[b] = !m[b];
      end
    end
  endtask

  // Watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit              sgn [];
    int              mag [];
    int              sent = 0, recv = 0, kind;
    bit              have = 0, acc_pend = 0, take_pend = 0, last_acc = 0;
    ref_result_t     rr, cur;
    logic [N-1:0]    sv_c;
    logic [K-1:0]    sv_u;
    logic            sv_ok;
    logic [3:0]      sv_hw;
    logic [31:0]     sv_cyc;

    for (int i = 0; i < N; i++) in_llr[i] = '0;
    // random systematic code
    hcol = new [N];
    for (int j = 0; j < N; j++) begin
      if (j < KK) begin
        hcol[j] = 0;
        while (hcol[j] == 0) hcol[j] = {$urandom, $urandom} & ((64'd1 << R) - 1);
      end else hcol[j] = 64'd1 << (j - KK);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      h_we = 1'b1; h_addr = LOGN'(j); h_col = SW'(hcol[j]);
      g_we = 1'b1; g_addr = LOGN'(j); g_row = (j < KK) ? (K'(1) << j) : '0;
    end
    @(negedge clk);
    h_we = 1'b0; g_we = 1'b0;

    while (recv < NFRAMES) begin
      @(negedge clk);
      // what happened at the last rising edge
      if (acc_pend) begin
        if (last_acc) n_b2b++;
        sent++; have = 0;
      end
      last_acc = acc_pend;
      if (take_pend) begin
        rr = expq.pop_front();
        recv++;
        check(sv_ok == rr.ok, "ok flag");
        check(sv_cyc == 32'(rr.cycles), $sformatf("cycles dut=%0d ref=%0d", sv_cyc, rr.cycles));
        check(int'(sv_hw) == rr.hw, "flip count");
        begin
          bit good;
          good = 1;
          for (int i = 0; i < N; i++) if (sv_c[i] != rr.c[i]) good = 0;
          check(good, "codeword");
          good = 1;
          for (int i = 0; i < K; i++) if (sv_u[i] != ((i < KK) ? rr.c[i] : 1'b0)) good = 0;
          check(good, "message");
        end
        if (!rr.ok) n_abandon++;
        else if (rr.cycles == 1) n_hd++;
        else n_hw[rr.hw]++;
      end
      // new inputs
      if (!have && sent < NFRAMES) begin
        kind = (sent % 8 == 7) ? 7 : int'($urandom % 7);
        if (sent % 16 < 4) kind = 0;     // runs of clean frames
        make_frame(kind, sgn, mag);
        for (int i = 0; i < N; i++) in_llr[i] = {sgn[i], (Q-1)'(mag[i])};
        cur = ref_decode(N, LWMAX, PMAX, sgn, mag, hcol);
        have = 1;
      end
      in_valid  = have && ($urandom % 8 != 0 || sent % 16 < 4);
      out_ready = ($urandom % 4 != 0);
      #1;
      acc_pend  = in_valid && in_ready;
      if (acc_pend) expq.push_back(cur);
      take_pend = out_valid && out_ready;
      if (out_valid && !out_ready) n_stall++;
      sv_c = out_c; sv_u = out_u; sv_ok = out_ok; sv_hw = out_hw; sv_cyc = out_cycles;
    end


    $display("mechanisms: hard-decision=%0d 1-bit=%0d 2-bit=%0d 3-bit=%0d 4-bit=%0d 5-bit=%0d 6-bit=%0d abandoned=%0d stalls=%0d back-to-back=%0d",
             n_hd, n_hw[1], n_hw[2], n_hw[3], n_hw[4], n_hw[5], n_hw[6], n_abandon, n_stall, n_b2b);
    check(n_hd > 0, "no hard-decision hit");
    check(n_hw[1] > 0, "no 1-bit hit");
    check(n_hw[2] > 0, "no 2-bit hit");
    check(n_hw[3] > 0, "no 3-bit hit");
    check(n_hw[4] + n_hw[5] + n_hw[6] > 0, "no hit through the controller parts");
    check(n_hw[6] > 0 || NFRAMES < 64, "no 6-bit hit");
    check(n_abandon > 0, "no abandonment");
    check(n_stall > 0, "no output stall");
    check(n_b2b > 0, "no back-to-back frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
