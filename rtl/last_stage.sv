// last_stage -- decoder stage T-1: final inverse permutation and output.
//
// Has no pattern memory. If the frame arrives with z_vld = 1 (found in stage
// T-2), the candidate is returned to natural order, yhat = pi^-1(z); otherwise
// the incoming yhat is passed on. yhat_vld = yhat_vld OR z_vld tells whether a
// codeword was found at all; when it is 0 the decoder gives up (all Q_max
// patterns failed) and out_yhat carries no meaning.
// This design registers the outputs (out_valid, out_yhat, out_yhat_vld), which
// brings the decoder latency to Q_max/Q_S + 2 + log2(N) cycles; out_yhat is
// loaded only for frames with a codeword.
module last_stage #(
  parameter int unsigned N    = orbgrand_pkg::N_DEF,
  localparam int unsigned LGN = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           i_valid,
  input  logic [N-1:0]   i_yhat,
  input  logic           i_yhat_vld,
  input  logic [N-1:0]   i_z,
  input  logic           i_z_vld,
  input  logic [LGN-1:0] i_pi [N],
  output logic           out_valid,
  output logic [N-1:0]   out_yhat,
  output logic           out_yhat_vld
);

  logic [N-1:0] yhat_inv;
  logic         dec_vld;

  inv_permute #(.N(N)) u_inv (.z(i_z), .pi(i_pi), .yhat(yhat_inv));

  assign dec_vld = i_valid & (i_yhat_vld | i_z_vld);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_yhat_vld <= 1'b0;
    end else begin
      out_valid    <= i_valid;
      out_yhat_vld <= dec_vld;
    end
  end

  always_ff @(posedge clk) begin
    if (dec_vld) out_yhat <= i_z_vld ? yhat_inv : i_yhat;
  end

endmodule
