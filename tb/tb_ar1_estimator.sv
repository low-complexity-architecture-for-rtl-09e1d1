// tb_ar1_estimator -- end-to-end, full-size test of the AR(1) correlation
// estimator (default parameters: B = 10, N = 512, 10-bit output with 8
// fraction bits).
//
// A bit-exact reference model runs beside the design for the whole test:
// it keeps the previous sign, a ring of the last N equal-sign flags and
// their count, and the floating-point segment table.  After every rising
// edge lambda_cnt must equal the count including the sample just clocked
// in, and rho/seg must equal the map of the count one cycle older, i.e.
// two cycles of latency from sample to estimate.
//
// Phases:
//   1. random samples with a varying sign-keep probability, plus runs of
//      constant sign (lambda = 1, rho = +1) and alternating sign
//      (lambda = 0, rho = -1);
//   2. a directed latency measurement: the window is filled with a
//      period-two flag pattern (lambda = 1/2, rho = 0), one flag is flipped
//      and the edges until rho moves are counted (must be 2);
//   3. the Monte Carlo experiment: Gaussian AR(1) processes
//      X_n = rho X_{n-1} + W_n, W_n ~ N(0, 0.61^2), for rho = -1 .. 1 in
//      steps of 0.04, quantised to 10 bits with 8 fraction bits.  After a
//      full window, the estimate is read at the end of each of R = 1000
//      non-overlapping windows of N samples (the replicates); the mean
//      estimate must lie within 0.08 of the true rho (the dyadic constants
//      alone can be off by up to 0.073).  The bias of the exact cosine map
//      of the same counts is printed beside it.
// Each mechanism -- all five segments, a comparison leaving the window and
// lowering the count, a full and an empty window, the latency -- must be
// seen at least once.
module tb_ar1_estimator;

  import ar1_pkg::*;

  localparam int unsigned B        = B_DEFAULT;
  localparam int unsigned N        = N_DEFAULT;
  localparam int unsigned RHO_W    = RHO_W_DEFAULT;
  localparam int unsigned RHO_FRAC = RHO_FRAC_DEFAULT;
  localparam int unsigned LW       = $clog2(N + 1);
  localparam int unsigned R        = 1000;        // windows per rho value
  localparam real         SIGMA_W  = 0.61;
  localparam real         BIAS_TOL = 0.08;
  localparam real         PI       = 3.14159265358979323846;

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic [B-1:0]            x;
  logic signed [RHO_W-1:0] rho;
  logic [LW-1:0]           lambda_cnt;
  segment_e                seg;

  int unsigned checks   = 0;
  int unsigned failures = 0;

  // Mechanism counters.
  int unsigned seg_hits[5];
  int unsigned drops      = 0;   // count lowered by a flag leaving the window
  int unsigned full_win   = 0;   // lambda_cnt == N
  int unsigned empty_win  = 0;   // lambda_cnt == 0 with a full window
  int unsigned latency    = 0;

  // Reference model state.
  bit          m_prev_sign;
  bit          m_ring[N];
  int unsigned m_ptr;
  int unsigned m_cnt;
  int unsigned m_cnt_prev;
  longint unsigned m_samples;

  ar1_estimator dut (
    .clk(clk), .rst_n(rst_n), .x(x), .rho(rho), .lambda_cnt(lambda_cnt), .seg(seg)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
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

  function automatic int ref_rho(int unsigned c);
    real l = real'(c) / real'(N);
    real y;
    case (ref_seg(c))
      0:       y = -1.0   + 0.625   * l;
      1:       y = -1.25  + 1.96875 * l;
      2:       y = -1.5   + 3.0     * l;
      3:       y = -0.75  + 1.96875 * l;
      default: y =  0.375 + 0.625   * l;
    endcase
    return $rtoi($floor(y * real'(1 << RHO_FRAC)));
  endfunction

  task automatic model_reset();
    m_prev_sign = 1'b0;
    foreach (m_ring[i]) m_ring[i] = 1'b0;
    m_ptr      = 0;
    m_cnt      = 0;
    m_cnt_prev = 0;
    m_samples  = 0;
  endtask

  // Apply one sample (we are just after a falling edge), clock it in and
  // check the design against the model.
  task automatic step(logic [B-1:0] sample);
    bit flag;
    x    = sample;
    flag = (sample[B-1] == m_prev_sign);
    m_prev_sign = sample[B-1];
    m_cnt_prev  = m_cnt;
    m_cnt       = m_cnt + flag - m_ring[m_ptr];
    m_ring[m_ptr] = flag;
    m_ptr       = (m_ptr + 1) % N;
    m_samples++;
    @(posedge clk);
    #1;
    checks++;
    if (lambda_cnt !== LW'(m_cnt) || int'(rho) != ref_rho(m_cnt_prev)
        || int'(seg) != ref_seg(m_cnt_prev)) begin
      failures++;
      if (failures < 10)
        $display("sample %0d: lambda_cnt=%0d rho=%0d seg=%0d, expected %0d %0d %0d",
                 m_samples, lambda_cnt, rho, seg, m_cnt, ref_rho(m_cnt_prev),
                 ref_seg(m_cnt_prev));
    end
    if (m_samples > 2) seg_hits[int'(seg)]++;
    if (m_cnt < m_cnt_prev) drops++;
    if (m_cnt == N) full_win++;
    if (m_cnt == 0 && m_samples > N) empty_win++;
    @(negedge clk);
  endtask

  function automatic logic [B-1:0] signed_sample(bit negative);
    int unsigned mag = $urandom_range((1 << (B - 1)) - 1);
    if (negative) return B'(-(int'(mag) + 1));
    return B'(mag);
  endfunction

  // Quantise a real sample to B bits with RHO_FRAC fraction bits, saturating.
  function automatic logic [B-1:0] quantise(real v);
    int q  = $rtoi($floor(v * real'(1 << RHO_FRAC)));
    int hi = (1 << (B - 1)) - 1;
    if (q > hi) q = hi;
    if (q < -hi - 1) q = -hi - 1;
    return B'(q);
  endfunction

  function automatic real gauss();
    real u1 = (real'($urandom) + 1.0) / 4294967297.0;
    real u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  task automatic random_phase(int unsigned cycles, int unsigned keep_pct);
    bit s = m_prev_sign;
    for (int unsigned i = 0; i < cycles; i++) begin
      s = ($urandom_range(99) < keep_pct) ? s : !s;
      step(signed_sample(s));
    end
  endtask

  task automatic latency_phase();
    bit s = m_prev_sign;
    bit flag;
    logic signed [RHO_W-1:0] rho_before;
    // Period-two flag pattern 1,0,1,0,... fills the window: lambda = 1/2
    // and the count stays constant, since each flag entering equals the one
    // leaving.
    for (int unsigned i = 0; i < N + 4; i++) begin
      flag = (i % 2 == 0);
      s    = flag ? s : !s;
      step(signed_sample(s));
    end
    rho_before = rho;
    // Replace one 1 of the pattern by a 0: the count drops by one and stays
    // there; count the edges until rho follows.
    latency = 0;
    for (int unsigned i = N + 4; i < N + 14; i++) begin
      flag = (i == N + 4) ? 1'b0 : (i % 2 == 0);
      s    = flag ? s : !s;
      step(signed_sample(s));
      latency++;
      if (rho != rho_before) break;
    end
    checks++;
    if (latency != 2) begin
      failures++;
      $display("latency %0d cycles, expected 2", latency);
    end
  endtask

  task automatic monte_carlo();
    real sum, ksum, mean, kmean, bias, worst;
    real xv, rho_true;
    worst = 0.0;
    for (int k = -25; k <= 25; k++) begin
      rho_true = 0.04 * real'(k);
      // Start from the stationary distribution (|rho| = 1 has none).
      xv   = (k == -25 || k == 25) ? 0.0
             : gauss() * SIGMA_W / $sqrt(1.0 - rho_true * rho_true);
      sum  = 0.0;
      ksum = 0.0;
      for (int unsigned i = 0; i < N + 2; i++) begin
        xv = rho_true * xv + SIGMA_W * gauss();
        step(quantise(xv));
      end
      for (int unsigned r = 0; r < R; r++) begin
        for (int unsigned i = 0; i < N; i++) begin
          xv = rho_true * xv + SIGMA_W * gauss();
          step(quantise(xv));
        end
        sum  += real'(rho) / real'(1 << RHO_FRAC);
        // Exact Kedem map of the same count, for comparison only.
        ksum += $cos(PI * (1.0 - real'(m_cnt_prev) / real'(N)));
      end
      mean  = sum / real'(R);
      kmean = ksum / real'(R);
      $display("rho=%6.2f  mean estimate %9.5f  bias %9.5f  (exact cosine map: bias %9.5f)",
               rho_true, mean, mean - rho_true, kmean - rho_true);
      bias = mean - rho_true;
      if (bias < 0.0 ? -bias > worst : bias > worst) worst = bias < 0.0 ? -bias : bias;
      checks++;
      if (bias > BIAS_TOL || bias < -BIAS_TOL) begin
        failures++;
        $display("rho=%5.2f: mean estimate %f, bias %f", rho_true, mean, bias);
      end
    end
    $display("Monte Carlo: %0d rho values, %0d windows each, largest |bias| %f",
             51, R, worst);
  endtask

  initial begin
    rst_n = 1'b0;
    x     = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    model_reset();

    random_phase(2 * N, 50);
    random_phase(N + 8, 100);   // constant sign: full window, rho = +1
    random_phase(N + 8, 0);     // alternating sign: empty window, rho = -1
    random_phase(N, 20);
    random_phase(N, 80);
    latency_phase();
    monte_carlo();

    for (int s = 0; s < 5; s++) begin
      checks++;
      if (seg_hits[s] == 0) begin
        failures++;
        $display("segment %0d never used", s + 1);
      end
    end
    checks++;
    if (drops == 0 || full_win == 0 || empty_win == 0) begin
      failures++;
      $display("mechanism missing: drops=%0d full=%0d empty=%0d", drops, full_win, empty_win);
    end
    $display("segments used: %0d %0d %0d %0d %0d; window drops %0d; full %0d; empty %0d; latency %0d",
             seg_hits[0], seg_hits[1], seg_hits[2], seg_hits[3], seg_hits[4],
             drops, full_win, empty_win, latency);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
