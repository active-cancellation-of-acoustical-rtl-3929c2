// Self-checking test of mac_sum: random partial sums (including extreme
// values), checks the total against a testbench sum and that valid comes
// exactly N+1 clocks after start; also checks that the partial inputs may
// change right after start.
module tb_mac_sum;
  localparam int N = 50, ACC_W = 48;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [ACC_W-1:0] partial [N];
  logic signed [ACC_W-1:0] sum;
  logic valid;
  longint expsum;
  int checks = 0, failures = 0;

  mac_sum #(.N(N), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (partial[i]) partial[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 100; r++) begin
      int lat;
      expsum = 0;
      foreach (partial[i]) begin
        partial[i] = ACC_W'({$urandom, $urandom}) >>> (r % 8 == 0 ? 0 : 8);
        expsum += longint'(partial[i]);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      foreach (partial[i]) partial[i] = ACC_W'($urandom);   // must not matter
      lat = 1;
      while (!valid && lat < 4 * N) begin @(negedge clk); lat++; end
      checks++;
      if (lat != N + 1) begin
        failures++; $display("FAIL latency %0d, expected %0d", lat, N + 1);
      end
      checks++;
      if (sum !== ACC_W'(expsum)) begin
        failures++; $display("FAIL sum round %0d: got %0d expected %0d", r, sum, ACC_W'(expsum));
      end
      @(negedge clk);
      checks++;
      if (valid || sum !== ACC_W'(expsum)) begin
        failures++; $display("FAIL sum not held / valid not a pulse");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
