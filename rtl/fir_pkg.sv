// Shared constants and word types of the low-latency FIR loop filter.
//
// The filter convolves the last J = N_MAC * N_OP input samples with J
// stored coefficients once per sample period.  The numbers below are the
// defaults of every module: 50 multiply-accumulate units of 512 taps each
// (25,600 taps), 14-bit converter words, 17-bit coefficients and a
// 125 MHz clock divided by 514 to give a 243 kHz sample rate.  The tap
// count, MAC count, word widths and clock come from the published design;
// the 514-cycle period, the 48-bit accumulator and the output shift are
// choices of this implementation.
package fir_pkg;

  localparam int unsigned N_MAC_DEF    = 50;   // parallel MACs
  localparam int unsigned N_OP_DEF     = 512;  // taps per MAC, one per clock
  localparam int unsigned PERIOD_DEF   = 514;  // clocks per sample period
  localparam int unsigned ADC_W_DEF    = 14;   // ADC word
  localparam int unsigned DAC_W_DEF    = 14;   // DAC word
  localparam int unsigned COEF_W_DEF   = 17;   // coefficient word
  localparam int unsigned ACC_W_DEF    = 48;   // accumulator (DSP48-sized)
  localparam int unsigned OUT_SHIFT_DEF = 16;  // coefficients read as Q1.16

  // Default-width words, for code that works at the published sizes.
  typedef logic signed [ADC_W_DEF-1:0]  sample_t;
  typedef logic signed [COEF_W_DEF-1:0] coef_t;
  typedef logic signed [ACC_W_DEF-1:0]  acc_t;

endpackage
