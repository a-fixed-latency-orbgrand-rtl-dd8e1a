// tb_stage0 -- stage 0 at N=16, B=8, M=8. Programs a random systematic H
// ([P | I]) and streams frames one per clock; half of them are made
// codewords by solving for the parity bits. For each frame, log2(N)+1 clocks
// later:
//  * o_yhat_vld must equal (H * HD(y)^T == 0), checked bit by bit;
//  * codeword: o_yhat = HD(y), and pi(HD(y)), pi, pi(H) must keep the values
//    of the previous undecoded frame (registers not loaded);
//  * otherwise: o_pi must give the N/2 least reliable positions in exact
//    order and a permutation of the rest; o_phd[j] = HD(y)[o_pi[j]] and
//    o_pih[r][j] = H[r][o_pi[j]].
// Frames use distinct magnitudes; the sorter-stop count (codeword frames) must
// be above zero.
module tb_stage0;
  localparam int N = 16, B = 8, M = 8, LGN = 4, RW = 3, NF = 300;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [B-1:0] llr [N];
  logic h_wr_en = 0;
  logic [RW-1:0] h_wr_row = '0;
  logic [N-1:0] h_wr_data = '0;
  logic o_valid, o_yhat_vld;
  logic [N-1:0] o_yhat, o_phd;
  logic [LGN-1:0] o_pi [N];
  logic [N-1:0] o_pih [M];
  logic [N-1:0] hm [M];
  int checks = 0, failures = 0, edges = 0, c_cw = 0, c_ncw = 0;
  always #5 clk = ~clk;
  always @(posedge clk) edges <= edges + 1;

  stage0 #(.N(N), .B(B), .M(M)) dut (.clk, .rst_n, .in_valid, .llr, .h_wr_en, .h_wr_row, .h_wr_data,
    .o_valid, .o_yhat, .o_yhat_vld, .o_phd, .o_pi, .o_pih);

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { int t_in; int perm[N]; logic [N-1:0] hd; bit cw; } exp_t;
  exp_t expq[$];
  logic [N-1:0]   last_phd;
  logic [LGN-1:0] last_pi [N];
  bit             have_last = 0;

  always @(negedge clk) begin
    if (rst_n && o_valid) begin
      exp_t ex;
      ex = expq.pop_front();
      checks += 2;
      if (edges - ex.t_in + 1 != LGN + 1) begin failures++; $display("latency"); end
      if (o_yhat_vld !== ex.cw) begin failures++; $display("yhat_vld got %0b exp %0b t_in %0d edges %0d", o_yhat_vld, ex.cw, ex.t_in, edges); end
      if (ex.cw) begin
        checks++;
        if (o_yhat !== ex.hd) failures++;
        if (have_last) begin
          checks++;
          if (o_phd !== last_phd || o_pi != last_pi) begin failures++; $display("registers loaded for a codeword"); end
        end
      end else begin
        for (int j = 0; j < N; j++) begin
          checks += 2;
          if (j < N / 2 && o_pi[j] !== LGN'(ex.perm[j])) failures++;
          if (j >= N / 2) begin
            automatic bit ok = 0;
            for (int k = N / 2; k < N; k++) if (o_pi[j] == LGN'(ex.perm[k])) ok = 1;
            if (!ok) failures++;
          end
          if (o_phd[j] !== ex.hd[o_pi[j]]) failures++;
          for (int r = 0; r < M; r++) begin
            checks++;
            if (o_pih[r][j] !== hm[r][o_pi[j]]) failures++;
          end
        end
        last_phd = o_phd;
        last_pi = o_pi;
        have_last = 1;
      end
    end
  end

  initial begin
    int pool[127];
    for (int i = 0; i < 127; i++) pool[i] = i;
    for (int i = 0; i < N; i++) llr[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) begin
      hm[r] = N'($urandom);
      for (int c = M; c < N; c++) hm[r][c] = (c - M == r);
      @(negedge clk);
      h_wr_en = 1; h_wr_row = RW'(r); h_wr_data = hm[r];
    end
    @(negedge clk);
    h_wr_en = 0;
    for (int f = 0; f < NF; f++) begin
      exp_t ex;
      logic [N-1:0] hd;
      logic [M-1:0] s;
      for (int i = 126; i > 0; i--) begin automatic int j = $urandom_range(0, i); automatic int x = pool[i]; pool[i] = pool[j]; pool[j] = x; end
      hd = N'($urandom);
      if ($urandom_range(0, 1) == 1)
        for (int r = 0; r < M; r++) begin
          automatic logic pb = 0;
          for (int c = 0; c < M; c++) pb ^= hm[r][c] & hd[c];
          hd[M + r] = pb;
        end
      for (int r = 0; r < M; r++) begin
        s[r] = 0;
        for (int c = 0; c < N; c++) s[r] ^= hm[r][c] & hd[c];
      end
      ex.cw = (s == 0);
      if (ex.cw) c_cw++; else c_ncw++;
      ex.hd = hd;
      for (int i = 0; i < N; i++) ex.perm[i] = i;
      for (int i = 1; i < N; i++)
        for (int j = i; j > 0 && pool[ex.perm[j-1]] > pool[ex.perm[j]]; j--) begin
          automatic int x = ex.perm[j]; ex.perm[j] = ex.perm[j-1]; ex.perm[j-1] = x;
        end
      @(negedge clk);
      for (int i = 0; i < N; i++) llr[i] = {hd[i], 7'(pool[i])};
      in_valid = ($urandom_range(0, 7) != 0);
      ex.t_in = edges + 1;
      if (in_valid) expq.push_back(ex);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LGN + 3) @(negedge clk);
    checks++;
    if (expq.size() != 0 || c_cw == 0 || c_ncw == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
