// orbgrand_pkg -- shared default sizes of the fixed-latency ORBGRAND decoder.
//
// The defaults describe the decoder's main configuration: maximum code length
// N = 128, B = 8-bit sign-magnitude LLRs, an H memory of N-1 rows (any code
// rate down to 1/N), Q_max = 2^13 error patterns split into stages of
// Q_S = 512 patterns each. The number of decoder stages is T = Q_max/Q_S + 2 and
// the latency in clock cycles is Q_max/Q_S + 2 + log2(N).
package orbgrand_pkg;

  localparam int unsigned N_DEF    = 128;   // maximum code length
  localparam int unsigned B_DEF    = 8;     // LLR width, sign + (B-1) magnitude bits
  localparam int unsigned M_DEF    = 127;   // rows of the H memory, N*(1-R_min)
  localparam int unsigned QMAX_DEF = 8192;  // total number of error patterns
  localparam int unsigned QS_DEF   = 512;   // error patterns tried per stage

  // Decoder latency in clock cycles for a given configuration.
  function automatic int unsigned latency(int unsigned n, int unsigned qmax, int unsigned qs);
    return qmax / qs + 2 + $clog2(n);
  endfunction

endpackage
