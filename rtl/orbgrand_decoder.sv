// orbgrand_decoder -- fixed-latency, code-agnostic ORBGRAND decoder (top).
//
// Decodes any binary linear code of length n <= N whose parity-check matrix
// fits the M x N H memory, one frame per clock, with a latency that does not
// depend on how many error patterns a frame needs. The Q_max error patterns
// of the schedule are split over NS = Q_max/Q_S pattern stages, each testing
// Q_S patterns in parallel, so every pattern has its own hardware:
//
//   stage 0        sorter + H*HD(y) check + pi(H)          (log2 N + 1 cycles)
//   stage 1        patterns 0 .. Q_S-1                     (1 cycle)
//   stage 2..T-2   patterns (t-1)*Q_S .. t*Q_S-1, pi^-1(z) (1 cycle each)
//   stage T-1      final pi^-1(z) and output register      (1 cycle)
//
// T = NS + 2 stages in all; latency L = Q_max/Q_S + 2 + log2(N) cycles
// (25 at the defaults N=128, Q_max=8192, Q_S=512), throughput one frame/cycle.
// A frame decoded early simply rides through the later stages with most of
// its registers not loaded.
//
// Programming (before decoding, not while frames are in flight):
//   h_wr_*  writes row h_wr_row of H (rows/columns a code does not use = 0);
//   pm_wr_* writes pattern row pm_wr_row of pattern stage pm_wr_stage
//           (0 = decoder stage 1); schedule position q = stage*Q_S + row.
// Frame interface: llr[i] = {sign, magnitude}; positions >= n must hold
// magnitude 2^(B-1)-1 and sign 0. out_yhat_vld = 0 means no pattern of the
// schedule gave a codeword.
// The stage structure, sizes and enables follow the decoder architecture;
// the programming ports, valid tag and output register are this design's.
module orbgrand_decoder #(
  parameter int unsigned N     = orbgrand_pkg::N_DEF,
  parameter int unsigned B     = orbgrand_pkg::B_DEF,
  parameter int unsigned M     = orbgrand_pkg::M_DEF,
  parameter int unsigned QMAX  = orbgrand_pkg::QMAX_DEF,
  parameter int unsigned QS    = orbgrand_pkg::QS_DEF,
  parameter bit          PRUNE = 1'b1,
  localparam int unsigned LGN  = $clog2(N),
  localparam int unsigned NS   = QMAX / QS,
  localparam int unsigned RW   = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned AW   = (QS > 1) ? $clog2(QS) : 1,
  localparam int unsigned SW   = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [B-1:0]  llr [N],
  input  logic          h_wr_en,
  input  logic [RW-1:0] h_wr_row,
  input  logic [N-1:0]  h_wr_data,
  input  logic          pm_wr_en,
  input  logic [SW-1:0] pm_wr_stage,
  input  logic [AW-1:0] pm_wr_row,
  input  logic [N-1:0]  pm_wr_data,
  output logic          out_valid,
  output logic [N-1:0]  out_yhat,
  output logic          out_yhat_vld
);

  // Pipeline registers: index 0 = after stage 0, index t = after stage t.
  logic           p_valid    [NS+1];
  logic [N-1:0]   p_yhat     [NS+1];
  logic           p_yhat_vld [NS+1];
  logic [N-1:0]   p_z        [NS+1];
  logic           p_z_vld    [NS+1];
  logic [N-1:0]   p_phd      [NS+1];
  logic [LGN-1:0] p_pi       [NS+1][N];
  logic [N-1:0]   p_pih      [NS+1][M];

  stage0 #(.N(N), .B(B), .M(M), .PRUNE(PRUNE)) u_stage0 (
    .clk, .rst_n, .in_valid, .llr,
    .h_wr_en, .h_wr_row, .h_wr_data,
    .o_valid(p_valid[0]), .o_yhat(p_yhat[0]), .o_yhat_vld(p_yhat_vld[0]),
    .o_phd(p_phd[0]), .o_pi(p_pi[0]), .o_pih(p_pih[0])
  );
  assign p_z[0]     = '0;   // stage 0 has no permuted-order candidate
  assign p_z_vld[0] = 1'b0;

  for (genvar g = 0; g < NS; g++) begin : g_stage
    grand_stage #(
      .N(N), .M(M), .QS(QS),
      .HAS_ZIN(g != 0), .FWD(g != NS - 1)
    ) u_stage (
      .clk, .rst_n,
      .pm_wr_en(pm_wr_en && (pm_wr_stage == SW'(g))), .pm_wr_row, .pm_wr_data,
      .i_valid(p_valid[g]), .i_yhat(p_yhat[g]), .i_yhat_vld(p_yhat_vld[g]),
      .i_z(p_z[g]), .i_z_vld(p_z_vld[g]), .i_phd(p_phd[g]),
      .i_pi(p_pi[g]), .i_pih(p_pih[g]),
      .o_valid(p_valid[g+1]), .o_yhat(p_yhat[g+1]), .o_yhat_vld(p_yhat_vld[g+1]),
      .o_z(p_z[g+1]), .o_z_vld(p_z_vld[g+1]), .o_phd(p_phd[g+1]),
      .o_pi(p_pi[g+1]), .o_pih(p_pih[g+1])
    );
  end

  last_stage #(.N(N)) u_last (
    .clk, .rst_n,
    .i_valid(p_valid[NS]), .i_yhat(p_yhat[NS]), .i_yhat_vld(p_yhat_vld[NS]),
    .i_z(p_z[NS]), .i_z_vld(p_z_vld[NS]), .i_pi(p_pi[NS]),
    .out_valid, .out_yhat, .out_yhat_vld
  );

endmodule
