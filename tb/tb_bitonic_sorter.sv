// tb_bitonic_sorter -- streams random frames (distinct 7-bit magnitudes) one
// per clock through two sorters, N=16: the pruned one (PRUNE=1) and a full one
// (PRUNE=0). Reference: a plain insertion sort of the magnitudes.
//  * full sorter: the whole index vector must equal the sorted order;
//  * pruned sorter: the N/2 least reliable positions must equal the sorted
//    order, the other N/2 must hold exactly the remaining indices;
//  * both: out_sign[j] = sign of entry out_idx[j]; output exactly log2(N)
//    clocks after the input;
//  * hold: a frame sent with all banks held must leave the output unchanged.
module tb_bitonic_sorter;
  localparam int N = 16, W = 7, LGN = 4, NF = 300;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [W-1:0] in_mag [N];
  logic [N-1:0] in_sign = '0;
  logic [LGN-1:0] hold = '0;
  logic vp, vf;
  logic [N-1:0] sp, sf;
  logic [LGN-1:0] ip [N], iF [N];
  int checks = 0, failures = 0, edges = 0;
  always #5 clk = ~clk;
  always @(posedge clk) edges <= edges + 1;

  bitonic_sorter #(.N(N), .W(W), .PRUNE(1'b1)) dut_p (.clk, .rst_n, .in_valid, .in_mag, .in_sign, .hold,
    .out_valid(vp), .out_sign(sp), .out_idx(ip));
  bitonic_sorter #(.N(N), .W(W), .PRUNE(1'b0)) dut_f (.clk, .rst_n, .in_valid, .in_mag, .in_sign, .hold,
    .out_valid(vf), .out_sign(sf), .out_idx(iF));

  typedef struct { int t_in; int perm[N]; logic [N-1:0] sgn; } exp_t;
  exp_t expq[$];
  bit   hold_phase = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) begin
    if (rst_n && vp && !hold_phase) begin
      exp_t ex;
      bit seen[N];
      ex = expq.pop_front();
      checks += 2;
      if (edges - ex.t_in + 1 != LGN) begin failures++; $display("latency"); end
      if (!vf) failures++;
      for (int j = 0; j < N; j++) seen[j] = 0;
      for (int j = 0; j < N; j++) begin
        checks += 3;
        if (iF[j] !== LGN'(ex.perm[j])) failures++;
        if (sf[j] !== ex.sgn[iF[j]] || sp[j] !== ex.sgn[ip[j]]) failures++;
        if (j < N / 2) begin
          if (ip[j] !== LGN'(ex.perm[j])) failures++;
        end else begin
          bit ok = 0;
          for (int k = N / 2; k < N; k++) if (ip[j] == LGN'(ex.perm[k])) ok = 1;
          if (!ok || seen[ip[j]]) failures++;
        end
        seen[ip[j]] = 1;
      end
    end
  end

  initial begin
    int pool[127];
    logic [LGN-1:0] snap [N];
    for (int i = 0; i < 127; i++) pool[i] = i;
    for (int i = 0; i < N; i++) in_mag[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      exp_t ex;
      for (int i = 126; i > 0; i--) begin automatic int j = $urandom_range(0, i); automatic int x = pool[i]; pool[i] = pool[j]; pool[j] = x; end
      @(negedge clk);
      for (int i = 0; i < N; i++) in_mag[i] = W'(pool[i]);
      in_sign = N'($urandom);
      in_valid = 1;
      for (int i = 0; i < N; i++) ex.perm[i] = i;
      for (int i = 1; i < N; i++)
        for (int j = i; j > 0 && pool[ex.perm[j-1]] > pool[ex.perm[j]]; j--) begin
          automatic int x = ex.perm[j]; ex.perm[j] = ex.perm[j-1]; ex.perm[j-1] = x;
        end
      ex.sgn = in_sign;
      ex.t_in = edges + 1;
      expq.push_back(ex);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LGN + 2) @(negedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    // Hold: a new frame with every bank held leaves the outputs unchanged.
    snap = iF;
    hold_phase = 1;
    hold = '1;
    for (int i = 0; i < N; i++) in_mag[i] = W'(N - i);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    repeat (LGN + 1) @(negedge clk);
    for (int j = 0; j < N; j++) begin
      checks++;
      if (iF[j] !== snap[j]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
