// tb_lambda_estimator -- self-checking test of the sign-persistence window
// counter, run at N = 32 so that the window wraps many times.
//
// Samples are drawn so that their sign changes with a probability that is
// varied from run to run (runs of equal signs, alternation, random); zero
// samples are included.  A reference model keeps the sign of every sample
// (MSB, zero counts as non-negative), the equal-sign flags and the sum of
// the last N flags.  One cycle after a sample is clocked in, lambda_cnt must
// equal that sum: this also checks the one-cycle latency.
module tb_lambda_estimator;

  localparam int unsigned B  = 10;
  localparam int unsigned N  = 32;
  localparam int unsigned LW = $clog2(N + 1);

  logic          clk = 1'b0;
  logic          rst_n;
  logic [B-1:0]  x;
  logic [LW-1:0] lambda_cnt;

  int unsigned checks   = 0;
  int unsigned failures = 0;
  int unsigned saw_full = 0;
  int unsigned saw_zero = 0;

  bit prev_sign;
  bit flags[$];   // equal-sign flags since reset, oldest first

  lambda_estimator #(.B(B), .N(N)) dut (
    .clk(clk), .rst_n(rst_n), .x(x), .lambda_cnt(lambda_cnt)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Next sample: keep the sign with probability keep_pct percent.
  function automatic logic [B-1:0] next_sample(bit prev, int unsigned keep_pct);
    bit          s;
    logic [B-1:0] mag;
    s   = ($urandom_range(99) < keep_pct) ? prev : !prev;
    mag = B'($urandom_range((1 << (B - 1)) - 1));
    if ($urandom_range(15) == 0) return '0;        // zero: non-negative
    return s ? (B'(-(int'(mag))) | {1'b1, {(B-1){1'b0}}}) : {1'b0, mag[B-2:0]};
  endfunction

  task automatic run(int unsigned cycles, int unsigned keep_pct);
    bit s;
    int unsigned expected;
    for (int unsigned i = 0; i < cycles; i++) begin
      x = next_sample(prev_sign, keep_pct);
      s = x[B-1];
      flags.push_back(s == prev_sign);
      prev_sign = s;
      @(posedge clk);
      #1;
      expected = 0;
      for (int k = 0; k < N && k < flags.size(); k++) expected += flags[flags.size() - 1 - k];
      checks++;
      if (lambda_cnt !== LW'(expected)) begin
        failures++;
        if (failures < 10) $display("keep=%0d cycle %0d: lambda_cnt=%0d expected %0d",
                                    keep_pct, i, lambda_cnt, expected);
      end
      if (expected == N) saw_full++;
      if (expected == 0 && flags.size() >= N) saw_zero++;
      @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    x     = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    prev_sign = 1'b0;   // the reset value of the previous-sign register
    flags.delete();
    run(4 * N, 50);
    run(3 * N, 100);
    run(3 * N, 0);
    run(4 * N, 90);
    run(4 * N, 10);
    run(4 * N, 70);
    checks++;
    if (saw_full == 0 || saw_zero == 0) begin
      failures++;
      $display("window never full (%0d) or empty (%0d)", saw_full, saw_zero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
