// pattern_memory -- error-pattern store of one decoder stage.
//
// Holds the Q_S error patterns e_0..e_{Q_S-1} tried by one stage. Pattern e_i is
// an N-bit vector with a 1 at each position of the sorted hard-decision vector
// pi(HD(y)) that is to be flipped; row 0 has the highest priority. Together the
// Q_max/Q_S stage memories hold the whole schedule (LUT-aided iLWO by default:
// first the empirically most frequent patterns, then iLWO patterns), so any
// schedule can be loaded. The memory is a register matrix written one row per
// clock (wr_en, wr_row, wr_data), like the H memory; the port is this design's
// choice. No reset: all rows must be written before decoding.
// Timing: a row written at a clock edge is visible on e right after it.
module pattern_memory #(
  parameter int unsigned N  = orbgrand_pkg::N_DEF,
  parameter int unsigned QS = orbgrand_pkg::QS_DEF,
  localparam int unsigned AW = (QS > 1) ? $clog2(QS) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_row,
  input  logic [N-1:0]  wr_data,
  output logic [N-1:0]  e [QS]
);

  logic [N-1:0] mem [QS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  assign e = mem;

endmodule
