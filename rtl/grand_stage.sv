// grand_stage -- one error-pattern stage (decoder stages 1 .. T-2).
//
// Each stage owns a pattern memory with Q_S error patterns and tries all of
// them on the frame at once: z_i = pi(HD(y)) XOR e_i, s_i = pi(H) * z_i^T. If
// any s_i is zero, the lowest-index (most likely) z_i is forwarded with
// z_vld = 1. If the frame arrives with z_vld = 1 (found in the stage before),
// the stage returns that candidate to natural order, yhat = pi^-1(z), and
// sets yhat_vld = 1 (an OR of the two flags). A frame arriving with
// yhat_vld = 1 only has its yhat carried on.
//
// Load enables of the output register (power saving; the register keeps an
// older frame's value when not loaded):
//   frame already decoded (yhat_vld or z_vld in)  -> yhat, yhat_vld only
//   found in this stage                           -> z, z_vld, pi
//   not found yet                                 -> pi(HD(y)), pi(H), pi
// The decoder architecture defines these enables. This design adds one rule:
// a stage only raises z_vld for a frame that is still undecoded at its input,
// because the data it tests is otherwise another frame's stale copy.
//
// Variants: HAS_ZIN = 0 is decoder stage 1, which has no z input and no
// inverse permutation (stage 0 returns natural-order words only). FWD = 0 is
// decoder stage T-2, the last with a pattern memory, which does not pass
// pi(HD(y)) and pi(H) on (o_phd and o_pih read zero).
// Timing: one clock from the i_* register to the o_* register.
module grand_stage #(
  parameter int unsigned N       = orbgrand_pkg::N_DEF,
  parameter int unsigned M       = orbgrand_pkg::M_DEF,
  parameter int unsigned QS      = orbgrand_pkg::QS_DEF,
  parameter bit          HAS_ZIN = 1'b1,
  parameter bit          FWD     = 1'b1,
  localparam int unsigned LGN    = $clog2(N),
  localparam int unsigned AW     = (QS > 1) ? $clog2(QS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // pattern memory programming
  input  logic           pm_wr_en,
  input  logic [AW-1:0]  pm_wr_row,
  input  logic [N-1:0]   pm_wr_data,
  // previous pipeline register
  input  logic           i_valid,
  input  logic [N-1:0]   i_yhat,
  input  logic           i_yhat_vld,
  input  logic [N-1:0]   i_z,
  input  logic           i_z_vld,
  input  logic [N-1:0]   i_phd,
  input  logic [LGN-1:0] i_pi  [N],
  input  logic [N-1:0]   i_pih [M],
  // this stage's pipeline register
  output logic           o_valid,
  output logic [N-1:0]   o_yhat,
  output logic           o_yhat_vld,
  output logic [N-1:0]   o_z,
  output logic           o_z_vld,
  output logic [N-1:0]   o_phd,
  output logic [LGN-1:0] o_pi  [N],
  output logic [N-1:0]   o_pih [M]
);

  logic [N-1:0]  e [QS];
  logic [QS-1:0] zero;
  logic [N-1:0]  z_sel;
  logic [AW-1:0] sel;
  logic          any_zero;
  logic          zin_vld;
  logic          active;
  logic          found;
  logic          dec_vld;
  logic [N-1:0]  yhat_nxt;

  pattern_memory #(.N(N), .QS(QS)) u_pmem (
    .clk, .wr_en(pm_wr_en), .wr_row(pm_wr_row), .wr_data(pm_wr_data), .e
  );

  syndrome_matrix #(.N(N), .M(M), .QS(QS)) u_synm (
    .phd(i_phd), .pih(i_pih), .e, .zero
  );

  priority_select #(.N(N), .QS(QS)) u_psel (
    .zero, .phd(i_phd), .e, .z(z_sel), .sel, .found(any_zero)
  );

  assign zin_vld = HAS_ZIN ? i_z_vld : 1'b0;
  assign active  = i_valid & ~i_yhat_vld & ~zin_vld;
  assign found   = active & any_zero;
  assign dec_vld = i_valid & (i_yhat_vld | zin_vld);

  if (HAS_ZIN) begin : g_inv
    logic [N-1:0] yhat_inv;
    inv_permute #(.N(N)) u_inv (.z(i_z), .pi(i_pi), .yhat(yhat_inv));
    assign yhat_nxt = zin_vld ? yhat_inv : i_yhat;
  end else begin : g_noinv
    assign yhat_nxt = i_yhat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid    <= 1'b0;
      o_yhat_vld <= 1'b0;
      o_z_vld    <= 1'b0;
    end else begin
      o_valid    <= i_valid;
      o_yhat_vld <= dec_vld;
      o_z_vld    <= found;
    end
  end

  always_ff @(posedge clk) begin
    if (dec_vld) o_yhat <= yhat_nxt;
    if (found)   o_z    <= z_sel;
    if (active)  o_pi   <= i_pi;
  end

  if (FWD) begin : g_fwd
    always_ff @(posedge clk) begin
      if (active && !any_zero) begin
        o_phd <= i_phd;
        o_pih <= i_pih;
      end
    end
  end else begin : g_nofwd
    assign o_phd = '0;
    always_comb for (int unsigned r = 0; r < M; r++) o_pih[r] = '0;
  end

endmodule
