// tb_orbgrand_decoder -- end-to-end test of the ORBGRAND decoder, reduced size (N=16, Q_max=64, Q_S=8).
//
// Programs the H memory with the parity-check matrix of BCH(15,7,2) (cyclic code,
// generator 0x1D1) and the pattern memories with an iLWO schedule of
// Q_max patterns, then streams frames back to back (with occasional bubbles)
// and checks every output against a serial reference decoder (orb_tb_pkg):
// out_yhat_vld, out_yhat when a codeword is found, and the fixed latency
// Q_max/Q_S + 2 + log2(N) cycles for every frame. Frames are built so that
// each mechanism of the decoder occurs: HD(y) already a codeword (stage-0 exit
// with the sorter stopped), correction in stage 1, in a middle stage and in the
// last pattern stage, several zero syndromes in one stage (priority select),
// no codeword in the whole schedule, and pipeline bubbles. Each mechanism that
// never occurred counts as a failure. LLR magnitudes are distinct so that the
// sorted order is unique; positions >= n carry the maximum magnitude, sign 0.
module tb_orbgrand_decoder;
  import orb_tb_pkg::*;

  localparam int N     = 16;
  localparam int B     = 8;
  localparam int M     = 15;
  localparam int QMAX  = 64;
  localparam int QS    = 8;
  localparam int NSTG  = QMAX / QS;
  localparam int LGN   = $clog2(N);
  localparam int LAT   = QMAX / QS + 2 + LGN;
  localparam int CN    = 15;
  localparam int CK    = 7;
  localparam logic [31:0] GPOLY = 32'h1D1;
  localparam int NF    = 400;
  localparam int RW    = $clog2(M);
  localparam int AW    = $clog2(QS);
  localparam int SW    = (NSTG > 1) ? $clog2(NSTG) : 1;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          in_valid = 1'b0;
  logic [B-1:0]  llr [N];
  logic          h_wr_en = 1'b0;
  logic [RW-1:0] h_wr_row = '0;
  logic [N-1:0]  h_wr_data = '0;
  logic          pm_wr_en = 1'b0;
  logic [SW-1:0] pm_wr_stage = '0;
  logic [AW-1:0] pm_wr_row = '0;
  logic [N-1:0]  pm_wr_data = '0;
  logic          out_valid;
  logic [N-1:0]  out_yhat;
  logic          out_yhat_vld;

  always #5 clk = ~clk;

  orbgrand_decoder #(.N(N), .B(B), .M(M), .QMAX(QMAX), .QS(QS)) dut (
    .clk, .rst_n, .in_valid, .llr,
    .h_wr_en, .h_wr_row, .h_wr_data,
    .pm_wr_en, .pm_wr_stage, .pm_wr_row, .pm_wr_data,
    .out_valid, .out_yhat, .out_yhat_vld
  );

  int checks = 0, failures = 0;
  int edges = 0;
  always @(posedge clk) edges <= edges + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    int   t_in;
    bit   vld;
    vec_t yhat;
    int   q_hit;
  } exp_t;

  exp_t expq[$];
  vec_t hmat[$];
  pat_t sched[$];
  int   n_done = 0;
  int   c_stage0 = 0, c_stage1 = 0, c_mid = 0, c_last = 0, c_fail = 0, c_multi = 0, c_bubble = 0;

  task automatic make_frame(output exp_t ex);
    int   pool[$], mags[$], perm[$];
    int   t, j, q, mode, nhit;
    vec_t u, c, err, hd, yh, pv;
    for (int i = 0; i < 127; i++) pool.push_back(i);
    for (int i = 126; i > 0; i--) begin
      j = $urandom_range(0, i);
      t = pool[i]; pool[i] = pool[j]; pool[j] = t;
    end
    for (int i = 0; i < N; i++) mags.push_back(i < CN ? pool[i] : 127);
    sort_perm(N, mags, perm);
    u = '0;
    for (int i = 0; i < CK; i++) u[i] = 1'($urandom_range(0, 1));
    c = encode(CK, GPOLY, u);
    err = '0;
    mode = $urandom_range(0, 9);
    if (mode >= 2 && mode <= 7) begin
      q = (mode == 7) ? $urandom_range((NSTG - 1) * QS, QMAX - 1) : $urandom_range(0, QMAX - 1);
      pv = pat_vec(sched[q]);
      for (int p = 0; p < N; p++) if (pv[p]) err[perm[p]] = 1'b1;
    end else if (mode >= 8) begin
      for (int k = 0; k < 6; k++) err[$urandom_range(0, CN - 1)] = 1'b1;
    end
    hd = c ^ err;
    for (int i = 0; i < N; i++) llr[i] = {hd[i], 7'(mags[i])};
    ref_decode(hmat, hd, perm, sched, QMAX, QS, ex.q_hit, yh, nhit);
    ex.vld  = (ex.q_hit < QMAX);
    ex.yhat = yh;
    if (ex.q_hit < 0)                         c_stage0++;
    else if (ex.q_hit < QS)                   c_stage1++;
    else if (ex.q_hit < (NSTG - 1) * QS)      c_mid++;
    else if (ex.q_hit < QMAX)                 c_last++;
    else                                      c_fail++;
    if (ex.q_hit >= 0 && ex.q_hit < QMAX && nhit > 1) c_multi++;
  endtask

  // Output checker: one expected entry per input frame, in order.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t ex;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output at edge %0d", edges);
      end else begin
        ex = expq.pop_front();
        if (edges - ex.t_in + 1 != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", edges - ex.t_in + 1, LAT);
        end
        checks++;
        if (out_yhat_vld !== ex.vld) begin
          failures++;
          $display("frame %0d: yhat_vld %0b expected %0b (q_hit %0d)", n_done, out_yhat_vld, ex.vld, ex.q_hit);
        end else if (ex.vld) begin
          checks++;
          if (out_yhat !== ex.yhat[N-1:0]) begin
            failures++;
            $display("frame %0d: yhat %h expected %h (q_hit %0d)", n_done, out_yhat, ex.yhat[N-1:0], ex.q_hit);
          end
        end
        n_done++;
      end
    end
  end

  initial begin
    exp_t ex;
    for (int i = 0; i < N; i++) llr[i] = '0;
    cyclic_h(CN, CN - CK, GPOLY, hmat);
    gen_schedule(N, QMAX, sched);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // H memory: code rows, then zero rows.
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      h_wr_en   = 1'b1;
      h_wr_row  = RW'(r);
      h_wr_data = (r < CN - CK) ? hmat[r][N-1:0] : '0;
    end
    // Pattern memories: schedule position q = stage*QS + row.
    for (int q = 0; q < QMAX; q++) begin
      vec_t pv;
      pv = pat_vec(sched[q]);
      @(negedge clk);
      h_wr_en     = 1'b0;
      pm_wr_en    = 1'b1;
      pm_wr_stage = SW'(q / QS);
      pm_wr_row   = AW'(q % QS);
      pm_wr_data  = pv[N-1:0];
    end
    @(negedge clk);
    pm_wr_en = 1'b0;
    h_wr_en  = 1'b0;
    // Frames, back to back, with a bubble now and then.
    for (int f = 0; f < NF; ) begin
      @(negedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid = 1'b0;
        c_bubble++;
      end else begin
        make_frame(ex);
        ex.t_in  = edges + 1;
        in_valid = 1'b1;
        expq.push_back(ex);
        f++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (n_done != NF || expq.size() != 0) begin
      failures++;
      $display("frames out %0d of %0d", n_done, NF);
    end
    $display("mechanisms: stage0-exit=%0d stage1=%0d middle=%0d last-pattern-stage=%0d no-codeword=%0d multi-hit=%0d bubbles=%0d",
             c_stage0, c_stage1, c_mid, c_last, c_fail, c_multi, c_bubble);
    checks += 7;
    if (c_stage0 == 0) failures++;
    if (c_stage1 == 0) failures++;
    if (c_mid == 0 && NSTG > 2) failures++;
    if (c_last == 0) failures++;
    if (c_fail == 0) failures++;
    if (c_multi == 0) failures++;
    if (c_bubble == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
