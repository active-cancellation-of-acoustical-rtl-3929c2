// dac_output: turns the full-precision filter sum into the DAC word.
//
// The sum carries the coefficient scaling; with coefficients read as
// Q1.16 numbers it is shifted right by SHIFT (arithmetic, truncating) and
// then clipped to the signed OUT_W-bit range, so that a sum too large for
// the converter gives full scale instead of wrapping round.  sat pulses
// with dac_valid whenever the word was clipped.  The register holds the
// word between updates, as the DAC needs.  Timing: one clock from in_valid
// to dac_valid.  The overall gain of the filter is set by the size of the
// coefficients; the shift, the truncation and the clipping are this
// design's choices.
module dac_output #(
  parameter int unsigned IN_W  = 48,
  parameter int unsigned OUT_W = 14,
  parameter int unsigned SHIFT = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic signed [OUT_W-1:0] dac_data,
  output logic                    dac_valid,
  output logic                    sat
);

  localparam logic signed [IN_W-1:0] MAXV = IN_W'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [IN_W-1:0] MINV = -MAXV - 1;

  logic signed [IN_W-1:0] scaled;
  assign scaled = in_data >>> SHIFT;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dac_data  <= '0;
      dac_valid <= 1'b0;
      sat       <= 1'b0;
    end else begin
      dac_valid <= in_valid;
      sat       <= 1'b0;
      if (in_valid) begin
        if (scaled > MAXV) begin
          dac_data <= OUT_W'(MAXV);
          sat      <= 1'b1;
        end else if (scaled < MINV) begin
          dac_data <= OUT_W'(MINV);
          sat      <= 1'b1;
        end else begin
          dac_data <= OUT_W'(scaled);
        end
      end
    end
  end

endmodule
