// tb_h_permute -- random H (N=16, M=6) and random permutations pi; checks
// pih[r][j] == h[r][pi[j]] for every element.
module tb_h_permute;
  localparam int N = 16, M = 6, LGN = 4;
  logic [N-1:0] h [M];
  logic [LGN-1:0] pi [N];
  logic [N-1:0] pih [M];
  int checks = 0, failures = 0;
  h_permute #(.N(N), .M(M)) dut (.h, .pi, .pih);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int p[N];
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) p[i] = i;
      for (int i = N - 1; i > 0; i--) begin automatic int j = $urandom_range(0, i); automatic int x = p[i]; p[i] = p[j]; p[j] = x; end
      for (int i = 0; i < N; i++) pi[i] = LGN'(p[i]);
      for (int r = 0; r < M; r++) h[r] = N'($urandom);
      #1;
      for (int r = 0; r < M; r++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (pih[r][j] !== h[r][p[j]]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
