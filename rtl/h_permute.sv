// h_permute -- column permutation pi(H) of the parity-check matrix.
//
// The pattern stages test candidates in sorted (permuted) order, so they need
// the columns of H in the same order: pih[r][j] = h[r][pi[j]], where pi[j] is
// the natural index of the j-th least reliable LLR. Each output bit is one
// N-to-1 multiplexer steered by pi[j]; this is the simplest structure for the
// function the architecture asks for. Purely combinational.
module h_permute #(
  parameter int unsigned N = orbgrand_pkg::N_DEF,
  parameter int unsigned M = orbgrand_pkg::M_DEF,
  localparam int unsigned LGN = $clog2(N)
) (
  input  logic [N-1:0]   h   [M],
  input  logic [LGN-1:0] pi  [N],
  output logic [N-1:0]   pih [M]
);

  always_comb begin
    for (int unsigned r = 0; r < M; r++) begin
      for (int unsigned j = 0; j < N; j++) begin
        pih[r][j] = h[r][pi[j]];
      end
    end
  end

endmodule
