// sample_ram: one segment of the input-sample delay line.
//
// The delay line of the filter is drawn as a chain of shift registers,
// 512 samples per segment, the oldest sample of each segment moving into
// the next segment once per sample period.  Shifting a block RAM is not
// possible, so each segment is stored as a circular buffer: this module is
// the storage itself, a simple dual-port RAM with one write port and one
// read port, and the pointer that turns it into a circular buffer lives in
// fir_slice.
//
// Interface: write when we is high (waddr, wdata); read is synchronous,
// rdata shows mem[raddr] one clock after raddr is presented.  Reading and
// writing the same address on the same clock returns the old word.  The
// contents are not reset (block RAM); fir_sequencer zeroes them after
// reset.  The 512-word depth and 14-bit width are the published ones; the
// RAM organisation is this design's choice.
module sample_ram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 14,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata,
  input  logic [AW-1:0]       raddr,
  output logic signed [W-1:0] rdata
);

  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
