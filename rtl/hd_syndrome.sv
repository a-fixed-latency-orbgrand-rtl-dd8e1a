// hd_syndrome -- syndrome of the hard-decision vector (stage 0).
//
// Computes s = H * HD(y)^T over GF(2) for all M parity checks in parallel: bit j
// of HD(y) is ANDed with H[i][j] and the N products are XORed together into s_i
// (an AND layer feeding an XOR tree per row). yhat_vld is the NOR of all
// syndrome bits: it is 1 when HD(y) already is a codeword. Rows of H that are
// all zero (unused parity checks) give s_i = 0 and do not disturb the NOR.
// Purely combinational; the surrounding stage registers it.
module hd_syndrome #(
  parameter int unsigned N = orbgrand_pkg::N_DEF,
  parameter int unsigned M = orbgrand_pkg::M_DEF
) (
  input  logic [N-1:0] h [M],
  input  logic [N-1:0] hd,
  output logic [M-1:0] s,
  output logic         yhat_vld
);

  always_comb begin
    for (int unsigned r = 0; r < M; r++) s[r] = ^(h[r] & hd);
  end

  assign yhat_vld = ~|s;

endmodule
