// tb_orbgrand_awgn: channel workload for orbgrand_decoder at its default sizes.
//
// BPSK over an AWGN channel (SNR = -10 log10 sigma^2) with a random systematic
// (128,105) code, the length and rate of the 5G CRC-aided polar code used to evaluate
// the architecture.  The channel output y = (1 - 2c) + noise is quantized to the 5-bit
// sign-magnitude input with 3 fractional bits (|y| * 8, saturated at 15); for AWGN the
// LLR is proportional to y, so this gives the same reliability order.  SNR points
// 6, 8 and 10 dB are run with FRAMES frames each.  Every result is compared with
// orbgrand_ref_pkg::ref_decode (codeword, flag, flips, cycle count); the testbench then
// prints the frame error rate and the average decoding cycles of each point.  Self-checks
// beyond the model comparison: at 10 dB fewer than 2 % of the frames may be wrong, and
// the average latency must fall as the SNR rises.
module tb_orbgrand_awgn;
  import orbgrand_pkg::*;
  import orbgrand_ref_pkg::*;

  localparam int N = N_DEF, Q = Q_DEF, SW = SW_DEF, K = K_DEF, LWMAX = LWMAX_DEF, PMAX = PMAX_DEF;
  localparam int R = 23, KK = N - R, LOGN = $clog2(N);
  localparam int FRAMES = 1000;
  localparam real SNRS [3] = '{6.0, 8.0, 10.0};

  logic clk = 1'b0, rst_n = 1'b0;
  logic h_we = 1'b0, g_we = 1'b0;
  logic [LOGN-1:0] h_addr = '0, g_addr = '0;
  logic [SW-1:0] h_col = '0;
  logic [K-1:0] g_row = '0;
  logic in_valid = 1'b0, in_ready;
  logic [Q-1:0] in_llr [N];
  logic out_valid, out_ready = 1'b1;
  logic [K-1:0] out_u;
  logic [N-1:0] out_c;
  logic out_ok;
  logic [3:0] out_hw;
  logic [31:0] out_cycles;

  always #5 clk = ~clk;

  orbgrand_decoder u_dut (
    .clk(clk), .rst_n(rst_n), .h_we(h_we), .h_addr(h_addr), .h_col(h_col),
    .g_we(g_we), .g_addr(g_addr), .g_row(g_row), .in_valid(in_valid), .in_ready(in_ready),
    .in_llr(in_llr), .out_valid(out_valid), .out_ready(out_ready), .out_u(out_u),
    .out_c(out_c), .out_ok(out_ok), .out_hw(out_hw), .out_cycles(out_cycles));

  int checks = 0, failures = 0;
  longint unsigned hcol [];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    repeat (3 * FRAMES * 4300 + 10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit m [], sgn [];
    int mag [];
    real avg [3];
    int  fer [3];
    ref_result_t rr;

    for (int i = 0; i < N; i++) in_llr[i] = '0;
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

    m = new [N]; sgn = new [N]; mag = new [N];
    for (int pt = 0; pt < 3; pt++) begin
      real sigma, y;
      longint unsigned cyc_sum;
      sigma   = $sqrt($pow(10.0, -SNRS[pt] / 10.0));
      cyc_sum = 0;
      fer[pt] = 0;
      for (int f = 0; f < FRAMES; f++) begin
        bit wrong;
        int q;
        for (int i = 0; i < KK; i++) m[i] = bit'($urandom % 2);
        for (int r = 0; r < R; r++) begin
          bit b;
          b = 0;
          for (int i = 0; i < KK; i++) if (m[i] && hcol[i][r]) b = !b;
          m[KK + r] = b;
        end
        for (int i = 0; i < N; i++) begin
          y = (m[i] ? -1.0 : 1.0) + sigma * gauss();
          sgn[i] = (y < 0.0);
          q = int'((y < 0.0 ? -y : y) * 8.0 + 0.5);
          mag[i] = (q > 15) ? 15 : q;
          in_llr[i] = {sgn[i], (Q-1)'(mag[i])};
        end
        rr = ref_decode(N, LWMAX, PMAX, sgn, mag, hcol);
        while (!in_ready) @(negedge clk);
        in_valid = 1'b1;
        @(negedge clk);
        in_valid = 1'b0;
        while (!out_valid) @(negedge clk);
        check(out_ok == rr.ok, "ok flag");
        check(out_cycles == 32'(rr.cycles), $sformatf("cycles dut=%0d ref=%0d", out_cycles, rr.cycles));
        wrong = 0;
        for (int i = 0; i < N; i++) begin
          if (out_c[i] != rr.c[i]) wrong = 1;
        end
        check(!wrong, "codeword matches the model");
        wrong = 0;
        for (int i = 0; i < N; i++) if (out_c[i] != m[i]) wrong = 1;
        if (wrong) fer[pt]++;
        cyc_sum += out_cycles;
        @(negedge clk);
      end
      avg[pt] = real'(cyc_sum) / real'(FRAMES);
      $display("SNR %4.1f dB: frames=%0d frame errors=%0d average cycles=%0.3f",
               SNRS[pt], FRAMES, fer[pt], avg[pt]);
    end
    check(fer[2] * 50 < FRAMES, "frame error rate at 10 dB");
    check(avg[0] > avg[1] && avg[1] > avg[2], "latency falls with SNR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
