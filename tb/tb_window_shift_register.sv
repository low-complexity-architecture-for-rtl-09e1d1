// tb_window_shift_register -- self-checking test of the N-stage window
// delay line at its default length (N = 512).
//
// Random bits are shifted in for several window lengths.  After every
// rising edge dout must equal the bit applied before the edge N - 1 edges earlier (N cycles of delay), and
// 0 while fewer than N bits have entered since reset.  A second reset in
// the middle checks that all stages are cleared.
module tb_window_shift_register;

  localparam int unsigned N      = ar1_pkg::N_DEFAULT;
  localparam int unsigned CYCLES = 5 * N;

  logic clk = 1'b0;
  logic rst_n;
  logic din;
  logic dout;

  int unsigned checks   = 0;
  int unsigned failures = 0;

  bit   hist[$];   // bits applied since the last reset, oldest first

  window_shift_register dut (.clk(clk), .rst_n(rst_n), .din(din), .dout(dout));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20 * CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int unsigned cycles);
    bit expected;
    for (int unsigned i = 0; i < cycles; i++) begin
      din = 1'($urandom);
      hist.push_back(din);
      @(posedge clk);
      #1;
      expected = (hist.size() >= N) ? hist[hist.size() - N] : 1'b0;
      checks++;
      if (dout !== expected) begin
        failures++;
        if (failures < 10) $display("cycle %0d: dout=%0b expected %0b", i, dout, expected);
      end
      @(negedge clk);
    end
  endtask

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0;
    din   = 1'b1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    hist.delete();
  endtask

  initial begin
    rst_n = 1'b0;
    din   = 1'b0;
    do_reset();
    run(3 * N + 17);
    do_reset();
    run(2 * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
