// syndrome_matrix -- parallel codebook queries of one stage.
//
// For each of the Q_S error patterns e_i of the stage, forms the candidate
// z_i = pi(HD(y)) XOR e_i and its syndrome s_i = pi(H) * z_i^T (same AND/XOR
// structure as the stage-0 syndrome circuit, M rows each). zero[i] is the NOR
// of s_i: candidate i is a codeword of the code described by pi(H).
// All Q_S x M syndrome bits are evaluated at once, which is what makes the
// latency fixed. Purely combinational.
module syndrome_matrix #(
  parameter int unsigned N  = orbgrand_pkg::N_DEF,
  parameter int unsigned M  = orbgrand_pkg::M_DEF,
  parameter int unsigned QS = orbgrand_pkg::QS_DEF
) (
  input  logic [N-1:0]  phd,
  input  logic [N-1:0]  pih [M],
  input  logic [N-1:0]  e   [QS],
  output logic [QS-1:0] zero
);

  always_comb begin
    for (int unsigned q = 0; q < QS; q++) begin
      logic [N-1:0] z;
      logic         nz;
      z  = phd ^ e[q];
      nz = 1'b0;
      for (int unsigned r = 0; r < M; r++) nz = nz | (^(pih[r] & z));
      zero[q] = ~nz;
    end
  end

endmodule
