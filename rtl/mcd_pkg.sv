// mcd_pkg: shared constants and helpers of the multi-exit Monte-Carlo Dropout
// (MCD) accelerator core.
//
// Number formats. Feature-map elements and class scores are signed two's
// complement fixed-point words of DATA_W / SCORE_W bits; the binary point
// position does not matter to this logic because the MCD layer only scales by
// a fraction smaller than one. The keep rate and the uniform random numbers
// are unsigned 16-bit fractions (value / 2**RATE_W). All widths are
// this design's choice: the method searches activation/weight widths among
// 4, 6, 8 and 16 bits, and 16 is used as the default.
package mcd_pkg;

  localparam int unsigned DFLT_DATA_W  = 16;  // feature-map element width
  localparam int unsigned DFLT_SCORE_W = 16;  // class score width
  localparam int unsigned DFLT_N_CLASS = 10;  // classes of the default (MNIST) workload

  // Galois LFSR feedback mask of x^16 + x^14 + x^13 + x^11 + 1 (maximal length).
  localparam logic [15:0] LFSR_TAPS = 16'hB400;
  localparam logic [15:0] BASE_SEED = 16'hACE1;

  // Non-zero LFSR seed for MCD layer `stage` of engine `eng` of exit
  // `exit_id`, so that every MCD layer draws its own dropout mask sequence.
  function automatic logic [15:0] engine_seed(input int unsigned exit_id,
                                              input int unsigned eng,
                                              input int unsigned stage = 0);
    logic [15:0] s;
    s = BASE_SEED ^ 16'(eng * 16'h1F35) ^ 16'(exit_id * 16'h5A5B)
      ^ 16'(stage * 16'h3C6D);
    if (s == '0) s = 16'h0001;
    return s;
  endfunction

  // Width that can index `n` items, at least one bit.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
