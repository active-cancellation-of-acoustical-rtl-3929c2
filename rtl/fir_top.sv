// fir_top: real-time FIR loop filter, 25,600 taps at 243 kHz.
//
// The filter sits in the feedback path of a servo loop, between the
// detector ADC and the controller, and convolves the incoming samples
// with an impulse response that cancels the mechanical resonances of the
// plant:  y(n) = sum over m = 0 .. J-1 of a(m) * x(n-m),  J = N_MAC*N_OP.
//
// How: the J-sample delay line and the J coefficients are cut into N_MAC
// lanes (fir_slice) of N_OP taps.  Each lane has its own sample RAM,
// coefficient RAM and MAC, and all lanes sweep their N_OP taps at once,
// one tap per clock, so one sample period is about N_OP clocks.  The oldest
// sample of every lane moves into the next lane once per period.  At the
// start of each period the lane results are latched and added in series
// (mac_sum), and the total is scaled and clipped for the DAC (dac_output).
// Lane 0 leaves out tap 0 in its sweep and adds a(0)*x(n) once x(n) is in,
// so a new sample reaches the DAC N_MAC+5 clocks after it is taken, not a
// whole period later.
//
// Interface: adc_data is a free-running ADC word; it is taken on the clock
// on which sample_strobe is high.  dac_data changes on the clock on which
// dac_valid pulses and holds between updates; sat flags a clipped output.
// Coefficients are written at any time through coef_we / coef_addr (the
// tap index m) / coef_wdata; a change takes effect from the next sweep.
// After reset the sample RAMs are zeroed for N_OP clocks, during which
// ready is low.
//
// Published: 25,600 taps as 50 MACs x 512 serial operations, 17-bit
// coefficients, 14-bit converters, 125 MHz clock, 243 kHz sample rate,
// the lane layout and shift path of the delay line, summing in series.
// This design's own: the 514-clock period, the circular-buffer RAMs, the
// tap-0 look-ahead, the coefficient write port, the 48-bit accumulators,
// the Q1.16 output scaling with clipping, and the clear after reset.
module fir_top #(
  parameter int unsigned N_MAC     = fir_pkg::N_MAC_DEF,
  parameter int unsigned N_OP      = fir_pkg::N_OP_DEF,
  parameter int unsigned PERIOD    = fir_pkg::PERIOD_DEF,
  parameter int unsigned ADC_W     = fir_pkg::ADC_W_DEF,
  parameter int unsigned DAC_W     = fir_pkg::DAC_W_DEF,
  parameter int unsigned COEF_W    = fir_pkg::COEF_W_DEF,
  parameter int unsigned ACC_W     = fir_pkg::ACC_W_DEF,
  parameter int unsigned OUT_SHIFT = fir_pkg::OUT_SHIFT_DEF,
  localparam int unsigned TW       = $clog2(N_OP),
  localparam int unsigned AW       = $clog2(N_MAC * N_OP)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [ADC_W-1:0]  adc_data,
  input  logic                     coef_we,
  input  logic [AW-1:0]            coef_addr,
  input  logic signed [COEF_W-1:0] coef_wdata,
  output logic signed [DAC_W-1:0]  dac_data,
  output logic                     dac_valid,
  output logic                     sample_strobe,
  output logic                     ready,
  output logic                     sat
);

  logic          clear, period_start, hold, sum_start, sweep_valid;
  logic [TW-1:0] clear_addr, tap;

  fir_sequencer #(.N_OP(N_OP), .N_MAC(N_MAC), .PERIOD(PERIOD)) u_seq (
    .clk, .rst_n, .clear, .clear_addr, .ready, .sample_strobe,
    .period_start, .hold, .sum_start, .sweep_valid, .tap
  );

  // Newest input sample x(n), taken once per period.
  logic signed [ADC_W-1:0] x_reg;
  always_ff @(posedge clk) begin
    if (!rst_n)             x_reg <= '0;
    else if (sample_strobe) x_reg <= adc_data;
  end

  // Coefficient a(m) lives in lane m / N_OP at word m % N_OP.
  logic [AW-1:0] coef_lane;
  logic [TW-1:0] coef_word;
  assign coef_lane = coef_addr >> TW;
  assign coef_word = coef_addr[TW-1:0];

  logic signed [ADC_W-1:0] s_chain [N_MAC+1];
  logic signed [ACC_W-1:0] partial [N_MAC];
  assign s_chain[0] = x_reg;

  for (genvar k = 0; k < N_MAC; k++) begin : g_lane
    fir_slice #(
      .FIRST(k == 0), .N_OP(N_OP), .ADC_W(ADC_W), .COEF_W(COEF_W), .ACC_W(ACC_W)
    ) u_slice (
      .clk, .rst_n, .clear, .clear_addr, .period_start, .hold, .sweep_valid, .tap,
      .s_in      (s_chain[k]),
      .s_out     (s_chain[k+1]),
      .coef_we   (coef_we && (coef_lane == AW'(k))),
      .coef_waddr(coef_word),
      .coef_wdata(coef_wdata),
      .result    (partial[k])
    );
  end

  logic signed [ACC_W-1:0] total;
  logic                    total_valid;

  mac_sum #(.N(N_MAC), .ACC_W(ACC_W)) u_sum (
    .clk, .rst_n, .start(sum_start), .partial, .sum(total), .valid(total_valid)
  );

  dac_output #(.IN_W(ACC_W), .OUT_W(DAC_W), .SHIFT(OUT_SHIFT)) u_dac (
    .clk, .rst_n, .in_valid(total_valid), .in_data(total),
    .dac_data, .dac_valid, .sat
  );

endmodule
