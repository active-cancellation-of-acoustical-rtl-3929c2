// Self-checking test of dac_output: random and edge-case sums, checks the
// shifted and clipped word, the sat flag, the one-clock latency and that
// the word holds between updates.
module tb_dac_output;
  localparam int IN_W = 48, OUT_W = 14, SHIFT = 16;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [IN_W-1:0] in_data = '0;
  logic signed [OUT_W-1:0] dac_data;
  logic dac_valid, sat;
  int checks = 0, failures = 0, nsat_hi = 0, nsat_lo = 0;

  dac_output #(.IN_W(IN_W), .OUT_W(OUT_W), .SHIFT(SHIFT)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input longint v);
    longint q, e;
    bit es;
    q = v / 65536;                          // floor division for SHIFT = 16
    if (v < 0 && (v % 65536) != 0) q = q - 1;
    es = 0; e = q;
    if (q > 8191)  begin e = 8191;  es = 1; nsat_hi++; end
    if (q < -8192) begin e = -8192; es = 1; nsat_lo++; end
    @(negedge clk); in_valid = 1; in_data = IN_W'(v);
    @(negedge clk); in_valid = 0; in_data = IN_W'($urandom);
    checks++;
    if (!dac_valid || longint'(dac_data) != e || sat != es) begin
      failures++;
      $display("FAIL in=%0d got %0d sat=%0b valid=%0b expected %0d sat=%0b", v, dac_data, sat, dac_valid, e, es);
    end
    @(negedge clk);
    checks++;
    if (dac_valid || longint'(dac_data) != e) begin
      failures++; $display("FAIL hold after in=%0d", v);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    apply(0); apply(65535); apply(-1); apply(-65536); apply(-65537);
    apply(8191 * 65536); apply(8191 * 65536 + 65535); apply(8192 * 65536);
    apply(-8192 * 65536); apply(-8192 * 65536 - 1);
    apply(64'sh7fff_ffff_ffff >>> 1); apply(-(64'sh7fff_ffff_ffff >>> 1));
    for (int i = 0; i < 300; i++) begin
      longint v;
      v = longint'($signed($urandom)) * (i % 3 == 0 ? 1 : 1 << (i % 12));
      apply(v);
    end
    checks++;
    if (nsat_hi == 0 || nsat_lo == 0) begin
      failures++; $display("FAIL clipping not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
