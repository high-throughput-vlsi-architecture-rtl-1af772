// tb_hard_syndrome: self-checking testbench of hard_syndrome at its default size.
// Random H columns and hard decisions; the expected syndrome is computed row by row
// (parity of the row of H ANDed with yhat), and zero must be high exactly when the
// word is a codeword, which is tested with words built to satisfy H.
module tb_hard_syndrome;
  import orbgrand_pkg::*;
  localparam int N = N_DEF, SW = SW_DEF;
  logic [N-1:0] yhat;
  logic [SW-1:0] col [N], syn, exp_syn;
  logic zero;
  int checks = 0, failures = 0;
  hard_syndrome u_dut (.yhat(yhat), .col(col), .syn(syn), .zero(zero));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 200; trial++) begin
      for (int i = 0; i < N; i++) col[i] = SW'($urandom);
      for (int i = 0; i < N; i += 32) yhat[i +: 32] = $urandom;
      if (trial % 2 == 1) begin
        // force a codeword: fix the parity through the last SW bits with unit columns
        for (int r = 0; r < SW; r++) col[N - SW + r] = SW'(1) << r;
        yhat[N-1 -: SW] = '0;
        #1;
        for (int r = 0; r < SW; r++) yhat[N - SW + r] = syn[r];
      end
      #1;
      for (int r = 0; r < SW; r++) begin
        bit b;
        b = 0;
        for (int i = 0; i < N; i++) b ^= (col[i][r] & yhat[i]);
        exp_syn[r] = b;
      end
      checks++;
      if (syn !== exp_syn) begin failures++; $display("FAIL syndrome trial %0d", trial); end
      checks++;
      if (zero !== (exp_syn == '0)) begin failures++; $display("FAIL zero trial %0d", trial); end
      if (trial % 2 == 1) begin
        checks++;
        if (!zero) begin failures++; $display("FAIL codeword not detected trial %0d", trial); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
