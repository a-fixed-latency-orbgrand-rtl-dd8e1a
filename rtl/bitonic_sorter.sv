// bitonic_sorter -- pipelined, pruned bitonic sorter of stage 0.
//
// Sorts the N received LLRs in ascending order of reliability, i.e. of their
// (B-1)-bit magnitude, and carries along each LLR's sign bit and its log2(N)-bit
// natural index. The outputs are the sorted sign bits pi(HD(y)) and the index
// vector pi (out_idx[j] = natural position of the j-th least reliable LLR).
//
// Structure: the standard bitonic network with log2(N) merge phases; phase p
// (p = 1..log2 N) runs compare-and-swap steps at distances 2^(p-1) .. 1, sorting
// blocks of 2^p elements alternately ascending/descending so that the final
// phase merges one bitonic sequence ascending. A register bank follows each
// phase, so the sorter has log2(N) cycles of latency and takes one frame per
// clock. A compare-and-swap exchanges its two entries only when the upper one
// is strictly larger (ascending) / smaller (descending); equal magnitudes keep
// their order.
//
// Pruning (PRUNE=1, the configuration of the architecture's implementation):
// after the first compare-and-swap set of the last phase, the N/2 least
// reliable entries are separated from the N/2 most reliable ones. The remaining
// log2(N)-1 sets acting only on the most reliable half are left out, so the
// lower half of the output is in some internal order. This is harmless when the
// loaded schedule only flips the most reliable half with weight-1 patterns.
//
// hold[k] keeps register bank k (after phase k+1) from updating: stage 0 uses
// it to stop the last log2(N)-2 banks once the hard decision is known to be a
// codeword, saving switching. Banks are also not updated for bubbles
// (in_valid = 0). valid flags are reset by rst_n; data registers are not.
// The pipeline structure, the pruning and the early stop follow the decoder
// architecture; the tie rule is this design's choice.
module bitonic_sorter #(
  parameter int unsigned N     = orbgrand_pkg::N_DEF,
  parameter int unsigned W     = orbgrand_pkg::B_DEF - 1,
  parameter bit          PRUNE = 1'b1,
  localparam int unsigned LGN  = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [W-1:0]   in_mag  [N],
  input  logic [N-1:0]   in_sign,
  input  logic [LGN-1:0] hold,
  output logic           out_valid,
  output logic [N-1:0]   out_sign,
  output logic [LGN-1:0] out_idx [N]
);

  typedef struct packed {
    logic [W-1:0]   mag;
    logic           sgn;
    logic [LGN-1:0] idx;
  } elem_t;

  elem_t          stg [LGN+1][N];  // stg[0]: input, stg[k+1]: register bank k
  logic [LGN:0]   vld;             // vld[0]: input, vld[k+1]: bank k

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      stg[0][i].mag = in_mag[i];
      stg[0][i].sgn = in_sign[i];
      stg[0][i].idx = LGN'(i);
    end
  end

  for (genvar k = 0; k < LGN; k++) begin : g_phase
    // Phase p = k+1: merge blocks of 2^p elements.
    elem_t d [N];
    elem_t q [N];

    always_comb begin
      elem_t v [N];
      elem_t t;
      t = '0;
      v = stg[k];
      for (int j = k; j >= 0; j--) begin
        for (int unsigned i = 0; i < N; i++) begin
          if (((i >> j) & 1) == 0) begin
            automatic int unsigned pa  = (i | (1 << j)) % N;
            automatic bit          asc = ((i >> (k + 1)) & 1) == 0;
            automatic bit          cut = PRUNE && (k == LGN - 1) && (j < k) && (i >= N / 2);
            if (!cut && (asc ? (v[i].mag > v[pa].mag) : (v[i].mag < v[pa].mag))) begin
              t     = v[i];
              v[i]  = v[pa];
              v[pa] = t;
            end
          end
        end
      end
      d = v;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[k+1] <= 1'b0;
      else        vld[k+1] <= vld[k];
    end

    always_ff @(posedge clk) begin
      if (vld[k] && !hold[k]) q <= d;
    end

    assign stg[k+1] = q;
  end

  assign vld[0]    = in_valid;
  assign out_valid = vld[LGN];

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      out_sign[i] = stg[LGN][i].sgn;
      out_idx[i]  = stg[LGN][i].idx;
    end
  end

endmodule
