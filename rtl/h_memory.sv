// h_memory -- programmable parity-check matrix store.
//
// Holds the M x N parity-check matrix H of the code being decoded as a plain
// register matrix. A code change rewrites it one N-bit row per clock through the
// write port (wr_en, wr_row, wr_data); the whole matrix is visible at once on h
// for the stage-0 syndrome and for the column permutation pi(H).
// The register matrix and its row-wise programming follow the decoder
// architecture; the exact write port (enable + row address) is this design's
// choice. There is no reset: H must be written before frames are decoded, and
// it must not change while frames are in flight. Columns n..N-1 and rows
// n-k..M-1 of a shorter or higher-rate code are written as zeros.
// Timing: a row written at a clock edge is visible on h right after it.
module h_memory #(
  parameter int unsigned N = orbgrand_pkg::N_DEF,
  parameter int unsigned M = orbgrand_pkg::M_DEF,
  localparam int unsigned RW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [N-1:0]  wr_data,
  output logic [N-1:0]  h [M]
);

  logic [N-1:0] mem [M];

  always_ff @(posedge clk) begin
    if (wr_en && (int'(wr_row) < int'(M))) mem[wr_row] <= wr_data;
  end

  assign h = mem;

endmodule
