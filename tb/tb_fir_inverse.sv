// Workload test of fir_top at its default size: the inverse filter for
// the six largest pole/zero pairs of the optical-resonator plant
// (resonances at 3190, 5530, 7290, 13700, 16350 and 25530 Hz with
// 30-400 Hz widths, anti-resonances at 3330, 6000, 7810, 14350, 16600 and
// 28400 Hz).  The filter swaps each pair: every plant pole becomes a
// filter zero and every plant zero a filter pole.  The testbench turns
// each pair into a digital biquad by mapping s-plane roots to z = exp(s/fs)
// (unity gain at DC), runs the cascade on an impulse to get 25,600
// coefficients at quarter scale (16384 = 1.0, so the filter gain is 1/4
// in the Q1.16 output scaling; the first coefficient of this filter is
// about 2.05 and would not fit at a larger scale), and loads them.  Two tones are then fed in,
// 5530 Hz (a filter zero) and 6000 Hz (a filter pole).  The test checks
// every output bit-exactly against the full convolution.  It measures the
// gain at each tone with a Hann-windowed single-bin DFT over the last 8192
// samples and checks it against the DFT of the loaded coefficients
// (within 2%), and it checks that the loaded 17-bit coefficients give
// the biquad design's response within 10%.
// The first-order piezo pole and any delay are not inverted, and the
// filter is made from the six tabulated pairs only.
module tb_fir_inverse;
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
        3: adc_data = tone(hist.size());
        default: adc_data = (i % 97 == 0) ? 14'sh1000 : 14'sh0;
      endcase
      @(negedge clk);
    end
    repeat (LAT + 4) @(negedge clk);
  endtask

  localparam real FS = 125.0e6 / PERIOD;       // sample rate, Hz
  localparam real PI = 3.14159265358979323846;
  localparam int  NP = 6;
  // plant resonances (filter zeros) and anti-resonances (filter poles), Hz
  real fp [NP] = '{3190.0, 5530.0, 7290.0, 13700.0, 16350.0, 25530.0};
  real gp [NP] = '{30.0, 60.0, 70.0, 110.0, 100.0, 400.0};
  real fz [NP] = '{3330.0, 6000.0, 7810.0, 14350.0, 16600.0, 28400.0};
  real gz [NP] = '{30.0, 30.0, 80.0, 140.0, 190.0, 40.0};
  real nb1 [NP], nb2 [NP], da1 [NP], da2 [NP], gk [NP];
  localparam real F1 = 5530.0, F2 = 6000.0, A1 = 7000.0, A2 = 150.0;

  // A root of width g Hz (FWHM) at f Hz maps to radius exp(-pi g/fs) and
  // angle 2 pi f/fs; a conjugate pair gives 1 - 2 r cos(th) z^-1 + r^2 z^-2.
  function automatic void build_inverse_filter();
    real w [NP][2], v [NP][2], x, y, rz, rp;
    for (int k = 0; k < NP; k++) begin
      rz = $exp(-PI * gp[k] / FS);
      rp = $exp(-PI * gz[k] / FS);
      nb1[k] = -2.0 * rz * $cos(2.0 * PI * fp[k] / FS); nb2[k] = rz * rz;
      da1[k] = -2.0 * rp * $cos(2.0 * PI * fz[k] / FS); da2[k] = rp * rp;
      gk[k]  = (1.0 + da1[k] + da2[k]) / (1.0 + nb1[k] + nb2[k]);
      w[k][0] = 0.0; w[k][1] = 0.0; v[k][0] = 0.0; v[k][1] = 0.0;
    end
    for (int m = 0; m < J; m++) begin
      x = (m == 0) ? 1.0 : 0.0;
      for (int k = 0; k < NP; k++) begin
        // direct form I: y = g x + g nb1 x1 + g nb2 x2 - da1 y1 - da2 y2
        y = gk[k] * (x + nb1[k] * w[k][0] + nb2[k] * w[k][1]) - da1[k] * v[k][0] - da2[k] * v[k][1];
        w[k][1] = w[k][0]; w[k][0] = x;
        v[k][1] = v[k][0]; v[k][0] = y;
        x = y;
      end
      wl_coef[m] = int'($rtoi(x * 16384.0 + (x >= 0.0 ? 0.5 : -0.5)));
      if (wl_coef[m] > 65535) wl_coef[m] = 65535;
      if (wl_coef[m] < -65536) wl_coef[m] = -65536;
    end
  endfunction

  // |F(exp(j 2 pi f/fs))| of the biquad cascade
  function automatic real inverse_gain(input real f);
    real th, c1, s1, c2, s2, nr, ni, dr, di, g;
    th = 2.0 * PI * f / FS;
    c1 = $cos(th); s1 = $sin(th); c2 = $cos(2.0 * th); s2 = $sin(2.0 * th);
    g = 1.0;
    for (int k = 0; k < NP; k++) begin
      nr = 1.0 + nb1[k] * c1 + nb2[k] * c2; ni = -(nb1[k] * s1 + nb2[k] * s2);
      dr = 1.0 + da1[k] * c1 + da2[k] * c2; di = -(da1[k] * s1 + da2[k] * s2);
      g = g * gk[k] * $sqrt((nr * nr + ni * ni) / (dr * dr + di * di));
    end
    return g;
  endfunction

  function automatic logic signed [13:0] tone(input int n);
    real t;
    t = A1 * $sin(2.0 * PI * F1 * n / FS) + A2 * $sin(2.0 * PI * F2 * n / FS);
    return 14'($rtoi(t));
  endfunction

  // gain of the loaded FIR, |sum a(m) exp(-j 2 pi f m/fs)| / 65536
  function automatic real fir_gain(input real f);
    real re, im, ph;
    re = 0.0; im = 0.0;
    for (int m = 0; m < J; m++) begin
      ph = 2.0 * PI * f * m / FS;
      re += wl_coef[m] * $cos(ph);
      im -= wl_coef[m] * $sin(ph);
    end
    return $sqrt(re * re + im * im) / 65536.0;
  endfunction

  // Hann-windowed DFT magnitude at f over the last L entries of q
  function automatic real tone_amp(ref int q [$], input real f, input int L);
    real re, im, wgt, ph;
    int n0;
    n0 = q.size() - L;
    re = 0.0; im = 0.0;
    for (int i = 0; i < L; i++) begin
      wgt = 0.5 - 0.5 * $cos(2.0 * PI * i / L);
      ph = 2.0 * PI * f * (n0 + i) / FS;
      re += wgt * q[n0 + i] * $cos(ph);
      im -= wgt * q[n0 + i] * $sin(ph);
    end
    return $sqrt(re * re + im * im);
  endfunction

  initial begin
    for (int m = 0; m < J; m++) a[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1; rst_rel_cyc = cyc; clear_pending = 1;
    build_inverse_filter();
    load_all(3, 0);
    run_samples(J + 400, 3);
    repeat (2 * PERIOD) @(negedge clk);
    checks++; if (n_clear == 0) fail("clear sweep never checked");
    checks++; if (n_a0 == 0) fail("a(0) look-ahead never exercised");
    checks++; if (n_handover == 0) fail("lane hand-over never exercised");
    checks++; if (n_checked < 100) fail("too few outputs checked");
    begin
      real g1, g2, q1, q2, e1, e2;
      g1 = tone_amp(yq, F1, 8192) / tone_amp(hist, F1, 8192);
      g2 = tone_amp(yq, F2, 8192) / tone_amp(hist, F2, 8192);
      q1 = fir_gain(F1);
      q2 = fir_gain(F2);
      e1 = 0.25 * inverse_gain(F1);
      e2 = 0.25 * inverse_gain(F2);
      $display("gain at %0.0f Hz: measured %f, loaded FIR %f, design %f", F1, g1, q1, e1);
      $display("gain at %0.0f Hz: measured %f, loaded FIR %f, design %f", F2, g2, q2, e2);
      checks++; if (g1 > 1.02 * q1 || g1 < 0.98 * q1) fail("measured gain at the filter zero");
      checks++; if (g2 > 1.02 * q2 || g2 < 0.98 * q2) fail("measured gain at the filter pole");
      checks++; if (q1 > 1.10 * e1 || q1 < 0.90 * e1) fail("17-bit FIR misses the design at the zero");
      checks++; if (q2 > 1.10 * e2 || q2 < 0.90 * e2) fail("17-bit FIR misses the design at the pole");
      checks++; if (!(e1 < 0.25 && e2 > 0.25)) fail("filter shape: zero not below, pole not above DC gain");
    end
    $display("mechanisms: clip_hi=%0d clip_lo=%0d a0_tap=%0d handover=%0d live_rewrite=%0d mid_reset=%0d clear=%0d outputs_checked=%0d",
             n_sat_hi, n_sat_lo, n_a0, n_handover, n_live, n_reset, n_clear, n_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
