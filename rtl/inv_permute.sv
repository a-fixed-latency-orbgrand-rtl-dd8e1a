// inv_permute -- inverse permutation pi^-1(z) back to natural order.
//
// A candidate found in sorted order z is returned to the natural order of the
// received vector: yhat[pi[j]] = z[j] for every j. pi is a permutation, so
// every output bit is written exactly once; each input bit is steered by an
// N-way demultiplexer addressed by pi[j]. Purely combinational.
module inv_permute #(
  parameter int unsigned N = orbgrand_pkg::N_DEF,
  localparam int unsigned LGN = $clog2(N)
) (
  input  logic [N-1:0]   z,
  input  logic [LGN-1:0] pi [N],
  output logic [N-1:0]   yhat
);

  always_comb begin
    yhat = '0;
    for (int unsigned j = 0; j < N; j++) yhat[pi[j]] = z[j];
  end

endmodule
