// rho_tilde -- multiplierless piecewise-linear map from lambda_hat to rho.
//
// Evaluates
//
//   rho_tilde(l) = -1   + 5/8   l   for l in [0.00, 0.14)
//                  -5/4 + 63/32 l   for l in [0.14, 0.30)
//                  -3/2 + 3     l   for l in [0.30, 0.70)
//                  -3/4 + 63/32 l   for l in [0.70, 0.86)
//                  +3/8 + 5/8   l   for l in [0.86, 1.00]
//
// an approximation of rho = cos(pi * (1 - l)) with dyadic constants.  The
// curve is odd-symmetric about l = 1/2, so only the three slopes of the
// first three segments are formed, each by shifts and one add or subtract:
//
//   5/8   l = ((l << 2) + l) >> 3
//   63/32 l = (l << 1) - (l >> 5)
//   3     l = (l << 1) + l
//
// Five adders add the segment offsets and a multiplexer, steered by four
// comparators on the window count, picks the result.  The work is done
// with log2(N) + 5 fraction bits, where every term is exact; the selected
// value is then truncated (rounded towards minus infinity) to the output
// format and registered.
//
// Interface and timing: lambda_cnt is the window count c, lambda = c / N,
// with N a power of two and c in [0, N].  rho is a signed RHO_W-bit word
// with RHO_FRAC fraction bits; seg tells which segment was used.  Both are
// registered: one cycle from lambda_cnt to rho.  rst_n is an active-low
// synchronous reset that clears the outputs.
//
// Follows the paper: the five segments, the dyadic constants, the three
// shared slope products and the mux.  This design's choices: the output
// format, truncation, the inclusion of l = 1 in the last segment, and the
// slope-3 product built as (l << 1) + l and the 63/32 product as
// (l << 1) - (l >> 5); the paper's figure prints the shifts ">> 1" and
// ">> 5" for these two paths without the remaining terms.
module rho_tilde
  import ar1_pkg::*;
#(
  parameter int unsigned N        = ar1_pkg::N_DEFAULT,
  parameter int unsigned RHO_W    = ar1_pkg::RHO_W_DEFAULT,
  parameter int unsigned RHO_FRAC = ar1_pkg::RHO_FRAC_DEFAULT,
  localparam int unsigned LW = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [LW-1:0]           lambda_cnt,
  output logic signed [RHO_W-1:0] rho,
  output segment_e                seg
);

  // Fraction bits of the internal fixed-point format, and its width:
  // sign + 3 integer bits cover the largest intermediate term, 5 * lambda.
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned FB = L + 5;
  localparam int unsigned IW = FB + 4;

  if ((N & (N - 1)) != 0) begin : g_bad_n
    $error("rho_tilde: N must be a power of two");
  end
  if (FB < RHO_FRAC) begin : g_bad_frac
    $error("rho_tilde: RHO_FRAC must not exceed log2(N) + 5");
  end

  typedef logic signed [IW-1:0] fix_t;

  // Segment offsets in the internal format.
  localparam fix_t ONE     = fix_t'(1) <<< FB;
  localparam fix_t OFF_1   = -ONE;                   // -1
  localparam fix_t OFF_2   = -((ONE <<< 2) + ONE) >>> 2;  // -5/4
  localparam fix_t OFF_3   = -((ONE <<< 1) + ONE) >>> 1;  // -3/2
  localparam fix_t OFF_4   = -((ONE <<< 1) + ONE) >>> 2;  // -3/4
  localparam fix_t OFF_5   =  ((ONE <<< 1) + ONE) >>> 3;  // +3/8

  // Segment thresholds on the window count.
  localparam int unsigned T1 = seg_threshold(BREAK_PCT_1, N);
  localparam int unsigned T2 = seg_threshold(BREAK_PCT_2, N);
  localparam int unsigned T3 = seg_threshold(BREAK_PCT_3, N);
  localparam int unsigned T4 = seg_threshold(BREAK_PCT_4, N);

  fix_t     lam;                  // lambda with FB fraction bits
  fix_t     slope_5_8;            // 5/8   lambda
  fix_t     slope_63_32;          // 63/32 lambda
  fix_t     slope_3;              // 3     lambda
  fix_t     y1, y2, y3, y4, y5;   // the five candidate line values
  fix_t     y_sel;
  segment_e seg_d;

  always_comb begin
    // c / N with L fraction bits, widened to FB fraction bits.
    lam         = fix_t'(lambda_cnt) <<< 5;

    slope_5_8   = ((lam <<< 2) + lam) >>> 3;
    slope_63_32 = (lam <<< 1) - (lam >>> 5);
    slope_3     = (lam <<< 1) + lam;

    y1 = slope_5_8   + OFF_1;
    y2 = slope_63_32 + OFF_2;
    y3 = slope_3     + OFF_3;
    y4 = slope_63_32 + OFF_4;
    y5 = slope_5_8   + OFF_5;

    if      (lambda_cnt < LW'(T1)) seg_d = SEG_1;
    else if (lambda_cnt < LW'(T2)) seg_d = SEG_2;
    else if (lambda_cnt < LW'(T3)) seg_d = SEG_3;
    else if (lambda_cnt < LW'(T4)) seg_d = SEG_4;
    else                           seg_d = SEG_5;

    unique case (seg_d)
      SEG_1:   y_sel = y1;
      SEG_2:   y_sel = y2;
      SEG_3:   y_sel = y3;
      SEG_4:   y_sel = y4;
      default: y_sel = y5;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rho <= '0;
      seg <= SEG_1;
    end else begin
      rho <= RHO_W'(y_sel >>> (FB - RHO_FRAC));
      seg <= seg_d;
    end
  end

endmodule
