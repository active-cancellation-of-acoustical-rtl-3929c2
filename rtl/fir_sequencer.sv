// fir_sequencer: the cycle plan of one sample period.
//
// All MACs work in lock step, so one counter drives the whole filter.
// After reset the sequencer first zeroes every sample RAM, one address per
// clock for N_OP clocks (clear high, clear_addr counting), so the delay
// line starts out silent.  It then counts clocks 0 .. PERIOD-1 of each
// sample period:
//
//   cycle PERIOD-1  sample_strobe: the ADC word is taken as the next x(n)
//   cycle 0         period_start:  every segment shifts in one sample
//   cycle 1         hold:          the finished MAC results are latched
//                                  (MAC #0 adds its a(0)*x(n) tap here)
//   cycle 2         sum_start:     the serial sum of the MAC results begins
//   cycles 1..N_OP  sweep_valid:   tap t = cycle-1 is read from every RAM
//
// With the published 512 taps per MAC the sweep fills cycles 1..512 and
// the last product is accumulated on cycle 513, so a period needs at least
// N_OP+2 clocks; the default of 514 clocks gives 125 MHz/514 = 243 kHz,
// the published sample rate.  The period length and this cycle plan are
// choices of this design; the published timing diagram shows only that
// the MACs are busy for the whole period and that the summing follows the
// period boundary.
module fir_sequencer #(
  parameter int unsigned N_OP   = 512,
  parameter int unsigned N_MAC  = 50,
  parameter int unsigned PERIOD = 514,
  localparam int unsigned TW    = $clog2(N_OP),
  localparam int unsigned CW    = $clog2(PERIOD)
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          clear,
  output logic [TW-1:0] clear_addr,
  output logic          ready,
  output logic          sample_strobe,
  output logic          period_start,
  output logic          hold,
  output logic          sum_start,
  output logic          sweep_valid,
  output logic [TW-1:0] tap
);

  if (PERIOD < N_OP + 2) begin : g_chk_sweep
    $error("fir_sequencer: PERIOD must be at least N_OP+2");
  end
  if (PERIOD < N_MAC + 3) begin : g_chk_sum
    $error("fir_sequencer: PERIOD must be at least N_MAC+3");
  end
  if ((1 << TW) != N_OP) begin : g_chk_pow2
    $error("fir_sequencer: N_OP must be a power of two");
  end

  typedef enum logic [0:0] {S_CLEAR, S_RUN} state_t;
  state_t        state;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_CLEAR;
      clear_addr <= '0;
      cnt        <= CW'(PERIOD - 1);
    end else begin
      unique case (state)
        S_CLEAR: begin
          clear_addr <= clear_addr + 1'b1;
          if (clear_addr == TW'(N_OP - 1)) state <= S_RUN;
        end
        S_RUN: cnt <= (cnt == CW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
        default: state <= S_CLEAR;
      endcase
    end
  end

  always_comb begin
    clear         = (state == S_CLEAR);
    ready         = (state == S_RUN);
    sample_strobe = ready && (cnt == CW'(PERIOD - 1));
    period_start  = ready && (cnt == '0);
    hold          = ready && (cnt == CW'(1));
    sum_start     = ready && (cnt == CW'(2));
    sweep_valid   = ready && (cnt >= CW'(1)) && (cnt <= CW'(N_OP));
    tap           = TW'(cnt - 1'b1);
  end

endmodule
