// tb_hd_syndrome -- random H (N=16, M=8) and hard decisions; the syndrome is
// recomputed bit by bit (s_i = XOR_j H[i][j]*HD_j) and compared, as is
// yhat_vld. Every other vector is made a codeword of the random H (by solving
// for it from a zero syndrome with a systematic H) so that yhat_vld = 1 occurs.
module tb_hd_syndrome;
  localparam int N = 16, M = 8;
  logic [N-1:0] h [M];
  logic [N-1:0] hd;
  logic [M-1:0] s;
  logic yhat_vld;
  int checks = 0, failures = 0, n_vld = 0;
  hd_syndrome #(.N(N), .M(M)) dut (.h, .hd, .s, .yhat_vld);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [M-1:0] ref_s;
    for (int t = 0; t < 400; t++) begin
      // H = [P | I]: columns M..N-1 form an identity, so the parity bits can be solved.
      for (int r = 0; r < M; r++) begin
        h[r] = N'($urandom);
        for (int c = M; c < N; c++) h[r][c] = (c - M == r);
      end
      hd = N'($urandom);
      if (t % 4 != 1) begin
        for (int r = 0; r < M; r++) begin
          automatic logic p = 0;
          for (int c = 0; c < M; c++) p ^= h[r][c] & hd[c];
          hd[M + r] = p;
        end
      end
      if (t % 4 == 2) hd[N-1] = ~hd[N-1];   // only the last parity check fails
      #1;
      for (int r = 0; r < M; r++) begin
        ref_s[r] = 0;
        for (int c = 0; c < N; c++) ref_s[r] ^= h[r][c] & hd[c];
      end
      checks += 2;
      if (s !== ref_s) begin failures++; $display("s %h vs %h", s, ref_s); end
      if (yhat_vld !== (ref_s == 0)) begin failures++; $display("vld"); end
      if (ref_s == 0) n_vld++;
    end
    checks++;
    if (n_vld == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
