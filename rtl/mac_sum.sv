// mac_sum: adds the N latched MAC results in series.
//
// On start the N partial sums are copied into a shift register and the
// total is cleared; on each of the next N clocks the word at the head of
// the register is added to the total and the register moves up by one.
// valid pulses on the clock after the last addition, N+1 clocks after
// start, and sum then holds the total until the next start.  One adder
// serves all N lanes, which is what keeps the added delay at about N
// clocks (N_MAC/f_clock in the published latency).  The structure, a
// shift register feeding one adder, is this design's choice; the series
// summing is the published one.
module mac_sum #(
  parameter int unsigned N     = 50,
  parameter int unsigned ACC_W = 48,
  localparam int unsigned CW   = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] partial [N],
  output logic signed [ACC_W-1:0] sum,
  output logic                    valid
);

  logic signed [ACC_W-1:0] sh [N];
  logic [CW-1:0]           left;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      left  <= '0;
      sum   <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        left <= CW'(N);
        sum  <= '0;
      end else if (left != '0) begin
        sum  <= sum + sh[0];
        left <= left - 1'b1;
        if (left == CW'(1)) valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) sh <= partial;
    else if (left != '0) begin
      for (int i = 0; i < N - 1; i++) sh[i] <= sh[i+1];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> (left == '0))
    else $error("mac_sum: start while a sum is in progress");

endmodule
