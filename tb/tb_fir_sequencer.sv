// Self-checking test of fir_sequencer at the default sizes: checks that
// the clear sweep covers every address once, that the period is PERIOD
// clocks, that each control pulse sits on its cycle of the period and
// that the sweep issues taps 0 .. N_OP-1 in order.
module tb_fir_sequencer;
  localparam int N_OP = 512, N_MAC = 50, PERIOD = 514, TW = $clog2(N_OP);
  logic clk = 0, rst_n = 0;
  logic clear, ready, sample_strobe, period_start, hold, sum_start, sweep_valid;
  logic [TW-1:0] clear_addr, tap;
  int checks = 0, failures = 0;

  fir_sequencer #(.N_OP(N_OP), .N_MAC(N_MAC), .PERIOD(PERIOD)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20 * PERIOD + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    int c, strobes;
    repeat (3) @(negedge clk);
    rst_n = 1;
    #1;
    // clear sweep
    for (int a = 0; a < N_OP; a++) begin
      expect_eq(clear, 1, "clear high");
      expect_eq(clear_addr, a, "clear address");
      expect_eq(ready, 0, "ready low while clearing");
      @(negedge clk);
    end
    expect_eq(clear, 0, "clear done");
    // first running cycle is the sample strobe (cycle PERIOD-1)
    expect_eq(sample_strobe, 1, "first strobe right after clear");
    @(negedge clk);
    strobes = 0;
    for (int p = 0; p < 10; p++) begin
      for (c = 0; c < PERIOD; c++) begin
        expect_eq(period_start, c == 0, "period_start");
        expect_eq(hold, c == 1, "hold");
        expect_eq(sum_start, c == 2, "sum_start");
        expect_eq(sample_strobe, c == PERIOD - 1, "sample_strobe");
        expect_eq(sweep_valid, (c >= 1) && (c <= N_OP), "sweep_valid");
        if (sweep_valid) expect_eq(tap, c - 1, "tap");
        if (sample_strobe) strobes++;
        @(negedge clk);
      end
    end
    expect_eq(strobes, 10, "one strobe per period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
