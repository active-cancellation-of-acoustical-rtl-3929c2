// Self-checking test of mac: random operands, random starts of new sums,
// hold with and without the extra product.  The reference accumulator is
// kept in the testbench with 64-bit integers.
module tb_mac;
  localparam int A_W = 14, B_W = 17, ACC_W = 48;
  logic clk = 0, rst_n = 0, en = 0, first = 0, hold = 0, hold_add = 0;
  logic signed [A_W-1:0] a = '0;
  logic signed [B_W-1:0] b = '0;
  logic signed [ACC_W-1:0] result;
  longint ref_acc, ref_res;
  int checks = 0, failures = 0;

  mac #(.A_W(A_W), .B_W(B_W), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [A_W-1:0] rnd_a(int i);
    case (i % 7)
      0: return {1'b1, {(A_W-1){1'b0}}};      // most negative
      1: return {1'b0, {(A_W-1){1'b1}}};      // most positive
      default: return A_W'($urandom);
    endcase
  endfunction

  initial begin
    ref_acc = 0; ref_res = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      int len;
      len = (s % 10 == 0) ? 512 : $urandom_range(1, 40);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        en = 1; first = (i == 0); hold = 0;
        a = rnd_a(i); b = B_W'($urandom);
        if (i % 5 == 3) begin a = {1'b1, {(A_W-1){1'b0}}}; b = {1'b1, {(B_W-1){1'b0}}}; end
        ref_acc = (i == 0 ? 0 : ref_acc) + longint'(a) * longint'(b);
      end
      @(negedge clk);
      en = 0; first = 0; hold = 1; hold_add = $urandom_range(1);
      a = A_W'($urandom); b = B_W'($urandom);
      ref_res = ref_acc + (hold_add ? longint'(a) * longint'(b) : 0);
      @(negedge clk);
      hold = 0; hold_add = 0;
      checks++;
      if (result !== ACC_W'(ref_res)) begin
        failures++;
        $display("FAIL sum %0d: got %0d expected %0d", s, result, ref_res);
      end
      // result must hold while the next sum is built
      en = 1; first = 1; a = A_W'($urandom); b = B_W'($urandom);
      ref_acc = longint'(a) * longint'(b);
      @(negedge clk);
      en = 0;
      checks++;
      if (result !== ACC_W'(ref_res)) begin
        failures++;
        $display("FAIL hold %0d", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
