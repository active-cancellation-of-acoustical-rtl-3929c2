// coef_ram: the coefficient store of one multiply-accumulate unit.
//
// MAC number k uses the filter coefficients a(512k) .. a(512k+511); this
// RAM holds them, word t being a(512k+t).  The host writes coefficients
// through the write port at any time (the coefficients are computed
// offline); the MAC reads one per clock through the read port.
//
// Interface: write when we is high (waddr, wdata); synchronous read,
// rdata = mem[raddr] one clock after raddr.  The contents are not reset:
// the coefficients must be loaded before the output means anything.  The
// depth (512) and the 17-bit width are the published figures; the plain
// write port stands in for the host bus, which is not specified.
module coef_ram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 17,
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
