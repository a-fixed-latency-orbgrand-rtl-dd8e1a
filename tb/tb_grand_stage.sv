// tb_grand_stage -- drives the input register of two pattern stages (N=8,
// M=3 parity rows so that zero syndromes are frequent, Q_S=4) with random
// frames every clock: a middle stage (HAS_ZIN=1, FWD=1) and a stage-1/T-2 style
// stage (HAS_ZIN=0, FWD=0). A cycle model written from the stage's rules
// (syndromes recomputed bit by bit, priority = lowest pattern row, inverse
// permutation, OR of flags, and the load enable of every output register)
// predicts all outputs one clock later; a data register is compared once the
// model has seen it loaded. Also counted: hits with several zero syndromes,
// frames inverted from z, frames passed on decoded, frames forwarded on.
module tb_grand_stage;
  localparam int N = 8, M = 3, QS = 4, LGN = 3, AW = 2, NT = 600;
  logic clk = 0, rst_n = 0;
  logic pm_wr_en = 0;
  logic [AW-1:0] pm_wr_row = '0;
  logic [N-1:0] pm_wr_data = '0;
  logic i_valid = 0, i_yhat_vld = 0, i_z_vld = 0;
  logic [N-1:0] i_yhat = '0, i_z = '0, i_phd = '0;
  logic [LGN-1:0] i_pi [N];
  logic [N-1:0] i_pih [M];
  // outputs of A (middle stage) and B (no z input, no forwarding)
  logic a_valid, a_yv, a_zv, b_valid, b_yv, b_zv;
  logic [N-1:0] a_yhat, a_z, a_phd, b_yhat, b_z, b_phd;
  logic [LGN-1:0] a_pi [N], b_pi [N];
  logic [N-1:0] a_pih [M], b_pih [M];
  int checks = 0, failures = 0;
  int c_multi = 0, c_inv = 0, c_pass = 0, c_fwd = 0, c_found = 0;
  always #5 clk = ~clk;

  grand_stage #(.N(N), .M(M), .QS(QS), .HAS_ZIN(1'b1), .FWD(1'b1)) dut_a (
    .clk, .rst_n, .pm_wr_en, .pm_wr_row, .pm_wr_data,
    .i_valid, .i_yhat, .i_yhat_vld, .i_z, .i_z_vld, .i_phd, .i_pi, .i_pih,
    .o_valid(a_valid), .o_yhat(a_yhat), .o_yhat_vld(a_yv), .o_z(a_z), .o_z_vld(a_zv),
    .o_phd(a_phd), .o_pi(a_pi), .o_pih(a_pih));
  grand_stage #(.N(N), .M(M), .QS(QS), .HAS_ZIN(1'b0), .FWD(1'b0)) dut_b (
    .clk, .rst_n, .pm_wr_en, .pm_wr_row, .pm_wr_data,
    .i_valid, .i_yhat, .i_yhat_vld, .i_z, .i_z_vld, .i_phd, .i_pi, .i_pih,
    .o_valid(b_valid), .o_yhat(b_yhat), .o_yhat_vld(b_yv), .o_z(b_z), .o_z_vld(b_zv),
    .o_phd(b_phd), .o_pi(b_pi), .o_pih(b_pih));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct {
    bit valid, yv, zv;
    logic [N-1:0] yhat, z, phd;
    logic [LGN-1:0] pi [N];
    logic [N-1:0] pih [M];
    bit ld_yhat, ld_z, ld_pi, ld_fwd;
  } model_t;

  model_t ma, mb;
  logic [N-1:0] pat [QS];

  function automatic void step(ref model_t m, input bit has_zin, input bit fwd);
    bit zero[QS];
    bit any = 0, zin, active, found, dec;
    int first = -1;
    logic [N-1:0] inv;
    for (int q = 0; q < QS; q++) begin
      bit nz = 0;
      for (int r = 0; r < M; r++) begin
        bit b = 0;
        for (int j = 0; j < N; j++) b ^= i_pih[r][j] & (i_phd[j] ^ pat[q][j]);
        nz |= b;
      end
      zero[q] = !nz;
    end
    for (int q = QS - 1; q >= 0; q--) if (zero[q]) first = q;
    any = (first >= 0);
    zin = has_zin && i_z_vld;
    active = i_valid && !i_yhat_vld && !zin;
    found = active && any;
    dec = i_valid && (i_yhat_vld || zin);
    for (int j = 0; j < N; j++) inv[i_pi[j]] = i_z[j];
    m.valid = i_valid;
    m.yv = dec;
    m.zv = found;
    if (dec) begin m.yhat = zin ? inv : i_yhat; m.ld_yhat = 1; end
    if (found) begin m.z = i_phd ^ pat[first]; m.ld_z = 1; end
    if (active) begin m.pi = i_pi; m.ld_pi = 1; end
    if (active && !any && fwd) begin m.phd = i_phd; m.pih = i_pih; m.ld_fwd = 1; end
    if (has_zin) begin
      if (found) begin
        int cnt = 0;
        for (int q = 0; q < QS; q++) cnt += zero[q];
        if (cnt > 1) c_multi++;
        c_found++;
      end
      if (i_valid && zin && !i_yhat_vld) c_inv++;
      if (i_valid && i_yhat_vld) c_pass++;
      if (active && !any) c_fwd++;
    end
  endfunction

  task automatic cmp(string nm, logic [N-1:0] got, logic [N-1:0] exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("%s: %h expected %h", nm, got, exp_v); end
  endtask

  task automatic compare(model_t m, bit fwd, logic v, logic yv, logic zv, logic [N-1:0] yhat,
                         logic [N-1:0] z, logic [N-1:0] phd, logic [LGN-1:0] pi [N], logic [N-1:0] pih [M]);
    cmp("valid", N'(v), N'(m.valid));
    cmp("yhat_vld", N'(yv), N'(m.yv));
    cmp("z_vld", N'(zv), N'(m.zv));
    if (m.ld_yhat) cmp("yhat", yhat, m.yhat);
    if (m.ld_z) cmp("z", z, m.z);
    if (m.ld_pi) for (int j = 0; j < N; j++) cmp("pi", N'(pi[j]), N'(m.pi[j]));
    if (fwd && m.ld_fwd) begin
      cmp("phd", phd, m.phd);
      for (int r = 0; r < M; r++) cmp("pih", pih[r], m.pih[r]);
    end
    if (!fwd) begin
      cmp("phd0", phd, '0);
      for (int r = 0; r < M; r++) cmp("pih0", pih[r], '0);
    end
  endtask

  initial begin
    int p[N];
    ma = '{default: 0, pi: '{default: 0}, pih: '{default: 0}};
    mb = ma;
    for (int j = 0; j < N; j++) i_pi[j] = '0;
    for (int r = 0; r < M; r++) i_pih[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < QS; q++) begin
      @(negedge clk);
      pat[q] = N'($urandom);
      pm_wr_en = 1; pm_wr_row = AW'(q); pm_wr_data = pat[q];
    end
    @(negedge clk);
    pm_wr_en = 0;
    for (int t = 0; t < NT; t++) begin
      i_valid = ($urandom_range(0, 9) != 0);
      i_yhat_vld = ($urandom_range(0, 4) == 0);
      i_z_vld = ($urandom_range(0, 3) == 0);
      i_yhat = N'($urandom); i_z = N'($urandom); i_phd = N'($urandom);
      for (int i = 0; i < N; i++) p[i] = i;
      for (int i = N - 1; i > 0; i--) begin automatic int j = $urandom_range(0, i); automatic int x = p[i]; p[i] = p[j]; p[j] = x; end
      for (int i = 0; i < N; i++) i_pi[i] = LGN'(p[i]);
      for (int r = 0; r < M; r++) i_pih[r] = N'($urandom);
      step(ma, 1, 1);
      step(mb, 0, 0);
      @(negedge clk);
      compare(ma, 1, a_valid, a_yv, a_zv, a_yhat, a_z, a_phd, a_pi, a_pih);
      compare(mb, 0, b_valid, b_yv, b_zv, b_yhat, b_z, b_phd, b_pi, b_pih);
    end
    $display("found=%0d multi=%0d inverted=%0d passed=%0d forwarded=%0d", c_found, c_multi, c_inv, c_pass, c_fwd);
    checks++;
    if (c_found == 0 || c_multi == 0 || c_inv == 0 || c_pass == 0 || c_fwd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
