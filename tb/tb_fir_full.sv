// Full-size test of fir_top with every parameter at its default: 50 lanes
// of 512 taps (25,600 taps) and a 514-clock sample period.  After reset
// all 25,600 coefficients are loaded (small random values, so the output
// stays inside the DAC range) and 25,600 + 400 random samples are fed in,
// so the first samples travel through every lane and leave the delay
// line.  Every output is compared with the full convolution computed in
// the testbench,  y(n) = clip((sum a(m) x(n-m)) >>> 16),  and the latency
// (N_MAC+5 clocks from sample strobe to DAC update), the period and the
// clear sweep after reset are checked.  The run takes about 13.4 million
// clocks.
module tb_fir_full;
  localparam int N_MAC = fir_pkg::N_MAC_DEF, N_OP = fir_pkg::N_OP_DEF;
  localparam int PERIOD = fir_pkg::PERIOD_DEF;
  localparam int J = N_MAC * N_OP, AW = $clog2(J);
  localparam int LAT = N_MAC + 5;             // strobe to dac_valid, clocks

  logic clk = 0, rst_n = 0;
  logic signed [13:0] adc_data = '0;
  logic coef_we = 0;
  logic [AW-1:0] coef_addr = '0;
  logic signed [16:0] coef_wdata = '0;
  logic signed [13:0] dac_data;
  logic dac_valid, sample_strobe, ready, sat;

  fir_top dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  int a [J];                 // reference coefficients
  int hist [$];              // every input sample since the last reset
  int yq [$];                // every output since the last reset
  int wl_coef [J];           // coefficient set computed by the testbench
  longint strobe_cyc [$];    // clock of each sample strobe
  int n_out = 0;             // outputs seen since the last reset
  int skip_lo = -1, skip_hi = -1;
  int n_sat_hi = 0, n_sat_lo = 0, n_a0 = 0, n_handover = 0;
  int n_live = 0, n_reset = 0, n_clear = 0, n_checked = 0;
  longint rst_rel_cyc = 0;
  bit clear_pending = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  initial begin : watchdog
    repeat (14500000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor: capture samples, check outputs against the reference.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      hist.delete(); strobe_cyc.delete(); yq.delete(); n_out = 0;
    end else begin
      if (clear_pending && ready) begin
        checks++; n_clear++;
        if (cyc - rst_rel_cyc != longint'(N_OP)) fail($sformatf("clear took %0d clocks", cyc - rst_rel_cyc));
        clear_pending = 0;
      end
      if (sample_strobe) begin
        if (strobe_cyc.size() > 0) begin
          checks++;
          if (cyc - strobe_cyc[$] != longint'(PERIOD)) fail("sample period");
        end
        hist.push_back(int'(adc_data));
        strobe_cyc.push_back(cyc);
      end
      if (dac_valid) begin
        int k;
        k = n_out;
        n_out++;
        yq.push_back(int'(dac_data));
        if (k >= hist.size()) fail("output without sample");
        else if (!(k >= skip_lo && k <= skip_hi)) begin
          longint acc, far, q, e;
          bit es;
          acc = 0; far = 0; es = 0;
          for (int m = 0; m < J && m <= k; m++) begin
            acc += longint'(a[m]) * longint'(hist[k-m]);
            if (m >= N_OP) far += longint'(a[m]) * longint'(hist[k-m]);
          end
          q = acc >>> 16;
          e = q;
          if (q > 8191)  begin e = 8191;  es = 1; end
          if (q < -8192) begin e = -8192; es = 1; end
          checks++; n_checked++;
          if (longint'(dac_data) != e || sat != es)
            fail($sformatf("output %0d: got %0d sat=%0b expected %0d sat=%0b", k, dac_data, sat, e, es));
          checks++;
          if (cyc - strobe_cyc[k] != longint'(LAT))
            fail($sformatf("latency %0d, expected %0d", cyc - strobe_cyc[k], LAT));
          if (es && q > 0) n_sat_hi++;
          if (es && q < 0) n_sat_lo++;
          if (a[0] != 0 && hist[k] != 0) n_a0++;
          if (far != 0) n_handover++;
        end
      end
    end
  end

  task automatic do_reset();
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rst_rel_cyc = cyc; clear_pending = 1;
  endtask

  task automatic write_coef(input int m, input int v);
    @(negedge clk);
    coef_we = 1; coef_addr = AW'(m); coef_wdata = 17'(v); a[m] = v;
    @(negedge clk);
    coef_we = 0;
  endtask

  // kind 0: small random, 1: full-range random, 2: unity tap plus far taps
  function automatic int coef_value(input int kind, input int m, input int mag);
    case (kind)
      0: return $urandom_range(2 * mag) - mag;
      1: return int'($signed(17'($urandom)));
      3: return wl_coef[m];
      default: return (m == 0) ? 65535 : (m == J - 1) ? -32768 : (m == N_OP) ? 16384 : 0;
    endcase
  endfunction

  // Outputs computed while coefficients change are not checked.
  task automatic load_all(input int kind, input int mag);
    skip_lo = n_out;
    skip_hi = 1 << 30;
    for (int m = 0; m < J; m++) write_coef(m, coef_value(kind, m, mag));
    skip_hi = hist.size() + 2;
  endtask

  task automatic run_samples(input int n, input int kind);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      while (!sample_strobe) @(negedge clk);
      case (kind)
        0: adc_data = 14'($urandom);
        1: adc_data = ($urandom_range(1) == 1) ? 14'sh1fff : -14'sh2000;
        default: adc_data = (i % 97 == 0) ? 14'sh1000 : 14'sh0;
      endcase
      @(negedge clk);
    end
    repeat (LAT + 4) @(negedge clk);
  endtask

  initial begin
    for (int m = 0; m < J; m++) a[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1; rst_rel_cyc = cyc; clear_pending = 1;
    load_all(0, 64);
    run_samples(J + 400, 0);
    repeat (2 * PERIOD) @(negedge clk);
    checks++; if (n_clear == 0) fail("clear sweep never checked");
    checks++; if (n_a0 == 0) fail("a(0) look-ahead never exercised");
    checks++; if (n_handover == 0) fail("lane hand-over never exercised");
    checks++; if (n_checked < 100) fail("too few outputs checked");

    $display("mechanisms: clip_hi=%0d clip_lo=%0d a0_tap=%0d handover=%0d live_rewrite=%0d mid_reset=%0d clear=%0d outputs_checked=%0d",
             n_sat_hi, n_sat_lo, n_a0, n_handover, n_live, n_reset, n_clear, n_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
