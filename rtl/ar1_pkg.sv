// ar1_pkg -- constants and types shared by the AR(1) correlation estimator.
//
// The estimator turns a stream of B-bit signed samples into an estimate of
// the lag-one correlation coefficient rho of an AR(1) process.  It counts
// how often consecutive samples keep the same sign over a sliding window of
// N comparisons (lambda_hat = count / N) and maps lambda_hat to rho through a
// five-segment piecewise-linear approximation of rho = cos(pi * (1 - lambda))
// whose constants are dyadic fractions, so only shifts and adds are needed.
//
// The defaults B = 10, N = 512 and the 10-bit signed output word follow the
// paper's FPGA implementation.  The output's fixed-point format (8 fraction
// bits) and the integer form of the segment breakpoints are this design's
// choices.
package ar1_pkg;

  // Sample width and window length of the reference implementation.
  localparam int unsigned B_DEFAULT = 10;
  localparam int unsigned N_DEFAULT = 512;

  // Output word: signed, RHO_W_DEFAULT bits, RHO_FRAC_DEFAULT fraction bits,
  // i.e. range [-2, 2) with a step of 1/256.  +1.0 (reached at lambda = 1)
  // must be representable, hence two integer bits.
  localparam int unsigned RHO_W_DEFAULT    = 10;
  localparam int unsigned RHO_FRAC_DEFAULT = 8;

  // Segment breakpoints of rho_tilde(lambda), in percent of lambda:
  // [0, .14), [.14, .30), [.30, .70), [.70, .86), [.86, 1].
  localparam int unsigned BREAK_PCT_1 = 14;
  localparam int unsigned BREAK_PCT_2 = 30;
  localparam int unsigned BREAK_PCT_3 = 70;
  localparam int unsigned BREAK_PCT_4 = 86;

  // Segment selected by the output multiplexer.
  typedef enum logic [2:0] {
    SEG_1 = 3'd0,  // -1    + 5/8   lambda
    SEG_2 = 3'd1,  // -5/4  + 63/32 lambda
    SEG_3 = 3'd2,  // -3/2  + 3     lambda
    SEG_4 = 3'd3,  // -3/4  + 63/32 lambda
    SEG_5 = 3'd4   // +3/8  + 5/8   lambda
  } segment_e;

  // Smallest window count c with c / n >= pct / 100, so that
  // "lambda < pct/100" is exactly "c < seg_threshold(pct, n)".
  function automatic int unsigned seg_threshold(int unsigned pct, int unsigned n);
    return (pct * n + 99) / 100;
  endfunction

endpackage
