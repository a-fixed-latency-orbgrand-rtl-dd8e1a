// priority_select -- picks the most likely valid candidate of a stage.
//
// Several patterns of one stage may give a zero syndrome at once. The patterns
// are stored in schedule order (row 0 most likely), so the candidate with the
// lowest index i among the zero syndromes is forwarded: z = pi(HD(y)) XOR e_i.
// found (z_vld before the stage's own gating) is the OR of the zero flags.
// The candidate is rebuilt from the chosen pattern rather than taken from a
// Q_S-wide multiplexer over the whole Z matrix; the value is the same.
// Purely combinational.
module priority_select #(
  parameter int unsigned N  = orbgrand_pkg::N_DEF,
  parameter int unsigned QS = orbgrand_pkg::QS_DEF,
  localparam int unsigned AW = (QS > 1) ? $clog2(QS) : 1
) (
  input  logic [QS-1:0] zero,
  input  logic [N-1:0]  phd,
  input  logic [N-1:0]  e [QS],
  output logic [N-1:0]  z,
  output logic [AW-1:0] sel,
  output logic          found
);

  always_comb begin
    sel = '0;
    for (int q = int'(QS) - 1; q >= 0; q--) begin
      if (zero[q]) sel = AW'(q);
    end
  end

  assign found = |zero;
  assign z     = phd ^ e[sel];

endmodule
