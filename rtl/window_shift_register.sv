// window_shift_register -- the N-stage delay network of the sliding window.
//
// A 1-bit shift register of N stages.  Every clock the newest sign
// comparison enters stage 0 and all stages move one place; dout is the
// comparison that entered N clocks earlier.  The lambda accumulator adds
// the newest comparison and subtracts dout, which keeps its sum limited to
// the last N comparisons.
//
// Interface: din is sampled on every rising edge of clk; dout is a register
// output, din delayed by exactly N cycles.  rst_n is an active-low
// synchronous reset that clears all stages, so dout is 0 for the first N
// cycles after reset.
//
// The paper calls for "a shift register of size N" with N = 512; the reset
// is this design's addition.
module window_shift_register #(
  parameter int unsigned N = ar1_pkg::N_DEFAULT
) (
  input  logic clk,
  input  logic rst_n,
  input  logic din,
  output logic dout
);

  if (N < 2) begin : g_bad_n
    $error("window_shift_register: N must be at least 2");
  end

  logic [N-1:0] stages_q;

  always_ff @(posedge clk) begin
    if (!rst_n) stages_q <= '0;
    else        stages_q <= {stages_q[N-2:0], din};
  end

  assign dout = stages_q[N-1];

endmodule
