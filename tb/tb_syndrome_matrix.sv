// tb_syndrome_matrix -- random pi(H) (N=16, M=3 rows, so zero syndromes are
// frequent), pi(HD(y)) and Q_S=8 patterns; each zero flag is compared with a
// bit-by-bit recomputation of pi(H) * (pi(HD(y)) XOR e_i)^T.
module tb_syndrome_matrix;
  localparam int N = 16, M = 3, QS = 8;
  logic [N-1:0] phd;
  logic [N-1:0] pih [M];
  logic [N-1:0] e [QS];
  logic [QS-1:0] zero;
  int checks = 0, failures = 0, n0 = 0, n1 = 0;
  syndrome_matrix #(.N(N), .M(M), .QS(QS)) dut (.phd, .pih, .e, .zero);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      phd = N'($urandom);
      for (int r = 0; r < M; r++) pih[r] = N'($urandom);
      for (int q = 0; q < QS; q++) e[q] = N'($urandom);
      #1;
      for (int q = 0; q < QS; q++) begin
        automatic bit nz = 0;
        for (int r = 0; r < M; r++) begin
          automatic bit b = 0;
          for (int j = 0; j < N; j++) b ^= pih[r][j] & (phd[j] ^ e[q][j]);
          nz |= b;
        end
        checks++;
        if (zero[q] !== !nz) failures++;
        if (nz) n1++; else n0++;
      end
    end
    checks++;
    if (n0 == 0 || n1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
