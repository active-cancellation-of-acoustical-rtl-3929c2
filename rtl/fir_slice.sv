// fir_slice: one of the N_MAC parallel lanes of the filter, a sample RAM,
// a coefficient RAM and a MAC wired as in the published connectivity
// diagram.
//
// Lane k holds delay-line positions 512k .. 512k+511 and coefficients
// a(512k) .. a(512k+511).  Its sample RAM is a circular buffer: on
// period_start the sample handed over from lane k-1 (s_in) is written one
// place past the newest one, so the oldest sample is overwritten.  During
// the sweep, tap t reads the t-th newest sample (address wptr - t) and
// coefficient t.  The sample read at the last tap is the oldest one; it is
// kept in s_out and becomes lane k+1's s_in at the next period_start,
// which moves every sample one position down the 25,600-long line per
// period, as the shift arrows in the diagram do.
//
// Lane 0 (FIRST = 1) computes output n+1 ahead of time.  Its s_in is the
// ADC sample; during the sweep that follows the arrival of x(n) it holds
// x(n) at position 1, so tap t is multiplied by coefficient t+1, the
// sample handed on to lane 1 is the one read at step N_OP-2 (position
// N_OP-1), and the read at the last step is not used.  When x(n+1) arrives, the hold step adds
// a(0)*x(n+1) to the finished sum, so the new sample reaches the output
// only N_MAC clocks later.  This look-ahead is this design's way of
// meeting the published latency (half a sample period plus N_MAC clocks).
//
// Timing: RAM reads take one clock; products are accumulated the clock
// after the read; result is valid from the clock after hold.
module fir_slice #(
  parameter bit          FIRST  = 1'b0,
  parameter int unsigned N_OP   = 512,
  parameter int unsigned ADC_W  = 14,
  parameter int unsigned COEF_W = 17,
  parameter int unsigned ACC_W  = 48,
  localparam int unsigned TW    = $clog2(N_OP)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [TW-1:0]            clear_addr,
  input  logic                     period_start,
  input  logic                     hold,
  input  logic                     sweep_valid,
  input  logic [TW-1:0]            tap,
  input  logic signed [ADC_W-1:0]  s_in,
  output logic signed [ADC_W-1:0]  s_out,
  input  logic                     coef_we,
  input  logic [TW-1:0]            coef_waddr,
  input  logic signed [COEF_W-1:0] coef_wdata,
  output logic signed [ACC_W-1:0]  result
);

  logic [TW-1:0]            wptr, wptr_next, s_raddr, c_raddr, s_waddr;
  logic                     s_we;
  logic signed [ADC_W-1:0]  s_wdata, s_rdata, mac_a;
  logic signed [COEF_W-1:0] c_rdata;
  logic                     rd_valid;
  logic [TW-1:0]            rd_tap;
  logic                     last_tap, carry_tap;

  assign wptr_next = wptr + 1'b1;

  always_comb begin
    s_we    = clear || period_start;
    s_waddr = clear ? clear_addr : wptr_next;
    s_wdata = clear ? '0 : s_in;
    s_raddr = wptr - tap;
    if (FIRST) c_raddr = sweep_valid ? tap + 1'b1 : '0;
    else       c_raddr = tap;
  end

  sample_ram #(.DEPTH(N_OP), .W(ADC_W)) u_sample_ram (
    .clk, .we(s_we), .waddr(s_waddr), .wdata(s_wdata),
    .raddr(s_raddr), .rdata(s_rdata)
  );

  coef_ram #(.DEPTH(N_OP), .W(COEF_W)) u_coef_ram (
    .clk, .we(coef_we), .waddr(coef_waddr), .wdata(coef_wdata),
    .raddr(c_raddr), .rdata(c_rdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr     <= '0;
      rd_valid <= 1'b0;
      rd_tap   <= '0;
      s_out    <= '0;
    end else begin
      if (period_start) wptr <= wptr_next;
      rd_valid <= sweep_valid;
      rd_tap   <= tap;
      if (rd_valid && carry_tap) s_out <= s_rdata;
    end
  end

  assign last_tap  = (rd_tap == TW'(N_OP - 1));
  // Lane 0 holds positions 1..N_OP-1 at steps 0..N_OP-2: its oldest used
  // sample is read one step earlier than in the other lanes.
  assign carry_tap = FIRST ? (rd_tap == TW'(N_OP - 2)) : last_tap;
  // During hold lane 0 multiplies the new sample by a(0), read on cycle 0.
  assign mac_a    = (FIRST && hold) ? s_in : s_rdata;

  mac #(.A_W(ADC_W), .B_W(COEF_W), .ACC_W(ACC_W)) u_mac (
    .clk, .rst_n,
    .en      (rd_valid && !(FIRST && last_tap)),
    .first   (rd_tap == '0),
    .a       (mac_a),
    .b       (c_rdata),
    .hold    (hold),
    .hold_add(FIRST),
    .result
  );

endmodule
