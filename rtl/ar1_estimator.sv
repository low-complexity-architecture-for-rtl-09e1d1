// ar1_estimator -- low-complexity estimator of the AR(1) correlation
// coefficient rho, producing a new estimate every clock from the last N
// samples.
//
// Datapath: lambda_estimator reduces each sample to its sign and keeps the
// number of equal consecutive signs over a sliding window of N comparisons;
// rho_tilde maps that count (lambda_hat = count / N) through a five-segment
// shift-and-add approximation of cos(pi * (1 - lambda)).  No multiplier,
// divider or CORDIC stage is used.
//
// Interface: x is a B-bit two's-complement sample, one per clock.  rho is a
// signed RHO_W-bit word with RHO_FRAC fraction bits (defaults 10 and 8:
// step 1/256, range [-2, 2), results within [-1, 1]).  lambda_cnt is the
// window count (combinational, one cycle after the sample) and seg the
// segment used for rho.  rst_n is an active-low synchronous reset.
//
// Timing: latency of two cycles from a sample on x to the rho that first
// includes it (one in lambda_estimator, one in rho_tilde), throughput one
// estimate per clock.  The first N + 2 outputs after reset are based on a
// partly filled window.
//
// Follows the paper: the structure, B = 10, N = 512, the 10-bit signed
// output, the two-cycle latency.  This design's choices: the output's
// fraction bits, the reset and the extra lambda_cnt and seg outputs.
module ar1_estimator
  import ar1_pkg::*;
#(
  parameter int unsigned B        = ar1_pkg::B_DEFAULT,
  parameter int unsigned N        = ar1_pkg::N_DEFAULT,
  parameter int unsigned RHO_W    = ar1_pkg::RHO_W_DEFAULT,
  parameter int unsigned RHO_FRAC = ar1_pkg::RHO_FRAC_DEFAULT,
  localparam int unsigned LW = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [B-1:0]            x,
  output logic signed [RHO_W-1:0] rho,
  output logic [LW-1:0]           lambda_cnt,
  output segment_e                seg
);

  lambda_estimator #(.B(B), .N(N)) u_lambda (
    .clk       (clk),
    .rst_n     (rst_n),
    .x         (x),
    .lambda_cnt(lambda_cnt)
  );

  rho_tilde #(.N(N), .RHO_W(RHO_W), .RHO_FRAC(RHO_FRAC)) u_rho (
    .clk       (clk),
    .rst_n     (rst_n),
    .lambda_cnt(lambda_cnt),
    .rho       (rho),
    .seg       (seg)
  );

endmodule
