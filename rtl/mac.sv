// mac: signed multiply-accumulate unit (one DSP48 slice in the original).
//
// Each clock with en high the product a*b is added to the accumulator;
// with first also high the accumulator restarts from the product, so a
// new sum needs no separate clear cycle.  A hold pulse copies the finished
// sum into result, which stays put while the next sum is built.  With
// hold_add high the product a*b of that clock is added on the way into
// result: this is how MAC #0 folds in the newest sample times a(0), which
// arrives only after the sweep of the other taps is over (see fir_top).
// hold and en must not be high on the same clock.
//
// Timing: single-cycle multiply-accumulate, result valid the clock after
// hold.  Widths: 14-bit samples and 17-bit coefficients as published; the
// 48-bit accumulator matches a DSP48 and is this design's choice (40 bits
// would hold 512 full-scale products).
module mac #(
  parameter int unsigned A_W   = 14,
  parameter int unsigned B_W   = 17,
  parameter int unsigned ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [A_W-1:0]   a,
  input  logic signed [B_W-1:0]   b,
  input  logic                    hold,
  input  logic                    hold_add,
  output logic signed [ACC_W-1:0] result
);

  logic signed [A_W+B_W-1:0] prod;
  logic signed [ACC_W-1:0]   prod_ext, acc;

  assign prod     = a * b;
  assign prod_ext = ACC_W'(prod);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc    <= '0;
      result <= '0;
    end else begin
      if (en) acc <= first ? prod_ext : acc + prod_ext;
      if (hold) result <= hold_add ? acc + prod_ext : acc;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(en && hold))
    else $error("mac: en and hold on the same clock");

endmodule
