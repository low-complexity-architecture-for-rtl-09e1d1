// tb_rho_tilde -- exhaustive self-checking test of the piecewise-linear
// lambda-to-rho map at its default size (N = 512, 10-bit output with 8
// fraction bits).
//
// Every window count c = 0 .. N is applied, in order and then in random
// order.  The expected output is computed in floating point from the
// segment table (breakpoints 0.14, 0.30, 0.70, 0.86; offsets and slopes
// -1 + 5/8 l, -5/4 + 63/32 l, -3/2 + 3 l, -3/4 + 63/32 l, 3/8 + 5/8 l)
// and floored to 1/256.  rho and seg must match one cycle after the count
// is applied.  Each output is also held against cos(pi * (1 - l)): the
// dyadic constants keep the error below 0.075.
module tb_rho_tilde;

  import ar1_pkg::*;

  localparam int unsigned N        = N_DEFAULT;
  localparam int unsigned RHO_W    = RHO_W_DEFAULT;
  localparam int unsigned RHO_FRAC = RHO_FRAC_DEFAULT;
  localparam int unsigned LW       = $clog2(N + 1);
  localparam real         PI       = 3.14159265358979323846;

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic [LW-1:0]           lambda_cnt;
  logic signed [RHO_W-1:0] rho;
  segment_e                seg;

  int unsigned checks   = 0;
  int unsigned failures = 0;
  int unsigned seg_hits[5];
  real         max_err  = 0.0;

  rho_tilde dut (.clk(clk), .rst_n(rst_n), .lambda_cnt(lambda_cnt), .rho(rho), .seg(seg));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_seg(int unsigned c);
    real l = real'(c) / real'(N);
    if (l < 0.14) return 0;
    if (l < 0.30) return 1;
    if (l < 0.70) return 2;
    if (l < 0.86) return 3;
    return 4;
  endfunction

  function automatic real ref_value(int unsigned c);
    real l = real'(c) / real'(N);
    case (ref_seg(c))
      0:       return -1.0  + 0.625    * l;
      1:       return -1.25 + 1.96875  * l;
      2:       return -1.5  + 3.0      * l;
      3:       return -0.75 + 1.96875  * l;
      default: return  0.375 + 0.625   * l;
    endcase
  endfunction

  task automatic apply(int unsigned c);
    real y, err;
    int  expected;
    lambda_cnt = LW'(c);
    @(posedge clk);
    #1;
    y        = ref_value(c);
    expected = $rtoi($floor(y * real'(1 << RHO_FRAC)));
    checks++;
    if (int'(rho) != expected || int'(seg) != ref_seg(c)) begin
      failures++;
      if (failures < 10) $display("c=%0d: rho=%0d seg=%0d expected %0d seg %0d",
                                  c, rho, seg, expected, ref_seg(c));
    end
    err = real'(rho) / real'(1 << RHO_FRAC) - $cos(PI * (1.0 - real'(c) / real'(N)));
    if (err < 0.0) err = -err;
    if (err > max_err) max_err = err;
    checks++;
    if (err > 0.075) begin
      failures++;
      if (failures < 10) $display("c=%0d: error %f against cos", c, err);
    end
    seg_hits[ref_seg(c)]++;
    @(negedge clk);
  endtask

  initial begin
    rst_n      = 1'b0;
    lambda_cnt = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (rho !== '0) begin
      failures++;
      $display("rho not cleared by reset");
    end
    @(negedge clk);
    rst_n = 1'b1;
    for (int unsigned c = 0; c <= N; c++) apply(c);
    for (int unsigned i = 0; i < 2 * N; i++) apply($urandom_range(N));
    for (int s = 0; s < 5; s++) begin
      checks++;
      if (seg_hits[s] == 0) begin
        failures++;
        $display("segment %0d never used", s + 1);
      end
    end
    $display("largest error against cos(pi(1-lambda)): %f", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
