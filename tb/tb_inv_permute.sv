// tb_inv_permute -- random permutations pi and words z (N=16); checks that
// yhat[pi[j]] == z[j] for all j, and that permuting yhat forward by pi gives z.
module tb_inv_permute;
  localparam int N = 16, LGN = 4;
  logic [N-1:0] z, yhat;
  logic [LGN-1:0] pi [N];
  int checks = 0, failures = 0;
  inv_permute #(.N(N)) dut (.z, .pi, .yhat);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int p[N];
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) p[i] = i;
      for (int i = N - 1; i > 0; i--) begin automatic int j = $urandom_range(0, i); automatic int x = p[i]; p[i] = p[j]; p[j] = x; end
      for (int i = 0; i < N; i++) pi[i] = LGN'(p[i]);
      z = N'($urandom);
      #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (yhat[p[j]] !== z[j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
