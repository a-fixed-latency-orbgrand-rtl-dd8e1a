// stage0 -- preliminary stage of the decoder: sort, check, permute H.
//
// Takes one received frame per clock: N LLRs, each B bits in sign-magnitude
// form (bit B-1 = sign = hard decision HD(y), bits B-2..0 = magnitude). With
// BPSK mapping 0 -> +1 and 1 -> -1 the hard decision is simply the sign bit.
// Unused positions of a code shorter than N must carry magnitude 2^(B-1)-1 and
// sign 0.
//
// Two paths run side by side:
//  * the pipelined bitonic sorter (log2 N cycles) produces the sorted hard
//    decisions pi(HD(y)) and the permutation pi;
//  * hd_syndrome checks HD(y) against the H memory. The syndrome is registered
//    in the first sorter cycle and NORed in the second, giving yhat_vld, which
//    then travels with the frame; it stops the last log2(N)-2 sorter banks of
//    a frame that is already a codeword (power saving, no effect on results).
// At the sorter output pi(H) is formed from the H memory and pi, and the
// stage-0/1 pipeline register is loaded:
//  * yhat_vld = 1: only yhat = HD(y) and yhat_vld are loaded;
//  * yhat_vld = 0: pi(HD(y)), pi and pi(H) are loaded, yhat is not.
// Registers that are not loaded keep an older frame's data; the flags tell the
// following stages to ignore it.
//
// Timing: a frame sampled with in_valid at clock edge 0 appears on the o_*
// outputs after edge log2(N)+1, with o_valid = 1.
// The datapath follows the decoder architecture; the LLR bit layout, the
// valid tag and the two-cycle syndrome/NOR split are this design's choices.
module stage0 #(
  parameter int unsigned N     = orbgrand_pkg::N_DEF,
  parameter int unsigned B     = orbgrand_pkg::B_DEF,
  parameter int unsigned M     = orbgrand_pkg::M_DEF,
  parameter bit          PRUNE = 1'b1,
  localparam int unsigned LGN  = $clog2(N),
  localparam int unsigned RW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // received frame
  input  logic           in_valid,
  input  logic [B-1:0]   llr [N],
  // H memory programming
  input  logic           h_wr_en,
  input  logic [RW-1:0]  h_wr_row,
  input  logic [N-1:0]   h_wr_data,
  // stage 0/1 pipeline register
  output logic           o_valid,
  output logic [N-1:0]   o_yhat,
  output logic           o_yhat_vld,
  output logic [N-1:0]   o_phd,
  output logic [LGN-1:0] o_pi  [N],
  output logic [N-1:0]   o_pih [M]
);

  logic [B-2:0]   mag [N];
  logic [N-1:0]   hd;
  logic [N-1:0]   h   [M];
  logic [M-1:0]   s;
  logic           s_zero_unused;
  logic [N-1:0]   hd_d   [LGN];   // HD(y) aligned with sorter bank k
  logic [M-1:0]   s_q;            // syndrome, aligned with bank 0
  logic [LGN-1:0] yvld_d;         // yhat_vld, aligned with bank k (k >= 1)
  logic [LGN-1:0] hold;
  logic           srt_valid;
  logic [N-1:0]   srt_sign;
  logic [LGN-1:0] srt_idx [N];
  logic [N-1:0]   pih [M];

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      mag[i] = llr[i][B-2:0];
      hd[i]  = llr[i][B-1];
    end
  end

  h_memory #(.N(N), .M(M)) u_hmem (
    .clk, .wr_en(h_wr_en), .wr_row(h_wr_row), .wr_data(h_wr_data), .h
  );

  hd_syndrome #(.N(N), .M(M)) u_syn (
    .h, .hd, .s, .yhat_vld(s_zero_unused)
  );

  // The NOR is taken one cycle later, from the registered syndrome.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      s_q      <= s;
      hd_d[0]  <= hd;
    end
  end

  for (genvar k = 1; k < LGN; k++) begin : g_dly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) yvld_d[k] <= 1'b0;
      else        yvld_d[k] <= (k == 1) ? ~|s_q : yvld_d[(k == 1) ? 1 : k-1];
    end
    always_ff @(posedge clk) hd_d[k] <= hd_d[k-1];
  end
  assign yvld_d[0] = 1'b0;   // not known yet in the first sorter cycle

  // Banks 0 and 1 always run; banks 2..LGN-1 stop for frames already decoded.
  always_comb begin
    hold = '0;
    for (int unsigned k = 2; k < LGN; k++) hold[k] = yvld_d[k-1];
  end

  bitonic_sorter #(.N(N), .W(B-1), .PRUNE(PRUNE)) u_sort (
    .clk, .rst_n, .in_valid, .in_mag(mag), .in_sign(hd), .hold,
    .out_valid(srt_valid), .out_sign(srt_sign), .out_idx(srt_idx)
  );

  h_permute #(.N(N), .M(M)) u_hperm (.h, .pi(srt_idx), .pih);

  // Stage 0/1 pipeline register with the load enables described above.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid    <= 1'b0;
      o_yhat_vld <= 1'b0;
    end else begin
      o_valid    <= srt_valid;
      o_yhat_vld <= srt_valid & yvld_d[LGN-1];
    end
  end

  always_ff @(posedge clk) begin
    if (srt_valid && yvld_d[LGN-1]) o_yhat <= hd_d[LGN-1];
    if (srt_valid && !yvld_d[LGN-1]) begin
      o_phd <= srt_sign;
      o_pi  <= srt_idx;
      o_pih <= pih;
    end
  end

endmodule
