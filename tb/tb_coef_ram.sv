// Self-checking test of coef_ram: fills the RAM with random coefficients,
// reads every address back (one-clock read latency), and checks that a
// read of the address being written returns the old word.  A shadow array
// in the testbench is the reference.
module tb_coef_ram;
  localparam int DEPTH = 512, W = 17, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  logic signed [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  coef_ram #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic signed [W-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, rdata, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); raddr = AW'(a);
      @(negedge clk); check(shadow[a], "readback");
    end
    // read and write the same address on one clock: old word comes back
    for (int i = 0; i < 50; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk); we = 1; waddr = AW'(a); raddr = AW'(a); wdata = W'($urandom);
      @(negedge clk); we = 0; check(shadow[a], "read-during-write");
      shadow[a] = wdata;
      @(negedge clk); check(shadow[a], "after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
