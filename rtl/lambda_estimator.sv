// lambda_estimator -- sliding-window estimate of the sign-persistence
// probability lambda of an AR(1) sample stream.
//
// Each B-bit two's-complement sample x is reduced to its sign bit (the MSB).
// The sign is compared with the sign of the previous sample; the result
// (1 = same sign) is registered (eq_q) and also enters an N-stage shift
// register.  An accumulator adds the newest registered comparison and
// subtracts the one leaving the shift register, so its value is the number
// of equal-sign pairs among the last N comparisons:
//
//   lambda_cnt = acc_q + eq_q - old_eq,   acc_q <= lambda_cnt
//
// lambda_hat = lambda_cnt / N.  N is a power of two, so the division is only
// a reinterpretation of the binary point (log2(N) fraction bits).
//
// Interface and timing: one sample per clock on x.  lambda_cnt is taken
// from the adder ahead of the accumulator register, as in the paper's
// figure, so it already counts the comparison of the sample clocked in on
// the last rising edge: one cycle from x to lambda_cnt.  rst_n is an
// active-low synchronous reset that clears the previous sign (read as
// "non-negative"), the comparison register, the window and the count.
//
// Follows the paper: sign extraction, equality comparator, shift register of
// size N, add-new/subtract-old accumulator.  This design's choices: the
// window holds N comparisons (the paper's figure draws N-1 delays after the
// comparison register, its text a shift register of size N and a window of
// N clock pulses), the reset, and the use of the MSB as the sign, so a zero
// sample counts as positive.
module lambda_estimator #(
  parameter int unsigned B  = ar1_pkg::B_DEFAULT,
  parameter int unsigned N  = ar1_pkg::N_DEFAULT,
  localparam int unsigned LW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [B-1:0]  x,
  output logic [LW-1:0] lambda_cnt
);

  if ((N & (N - 1)) != 0) begin : g_bad_n
    $error("lambda_estimator: N must be a power of two");
  end

  logic          sign_q;  // sign of the previous sample
  logic          eq_q;    // registered comparison of the newest pair
  logic          old_eq;  // comparison leaving the window
  logic [LW-1:0] acc_q;   // count one cycle ago

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sign_q <= 1'b0;
      eq_q   <= 1'b0;
      acc_q  <= '0;
    end else begin
      sign_q <= x[B-1];
      eq_q   <= (x[B-1] == sign_q);
      acc_q  <= lambda_cnt;
    end
  end

  window_shift_register #(.N(N)) u_window (
    .clk  (clk),
    .rst_n(rst_n),
    .din  (eq_q),
    .dout (old_eq)
  );

  assign lambda_cnt = acc_q + LW'(eq_q) - LW'(old_eq);

  // The count can never leave [0, N].
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n) lambda_cnt <= LW'(N));

endmodule
