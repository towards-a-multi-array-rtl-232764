// tb_fp32_add: checks the FP32 adder against sums formed in double precision
// and rounded once to single precision by the testbench. Operand exponents
// stay within 2^+-12 of each other so the double sum is exact and the single
// rounding is the correct one. Covers cancellation (a + -a, near-equal
// operands), the 3-cycle latency and infinity/NaN operands.
module tb_fp32_add;
  import tb_fp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  localparam int N = 3000;
  logic [31:0] va[N], vb[N];

  fp32_add dut (.clk, .a, .b, .y);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      va[i] = rand_fp(12);
      vb[i] = rand_fp(12);
      if (i % 7 == 0) vb[i] = {~va[i][31], va[i][30:0]};               // exact cancel
      if (i % 7 == 1) vb[i] = {~va[i][31], va[i][30:0] ^ 31'($urandom_range(15))};
      if (i % 7 == 2) vb[i] = 32'd0;
    end
    va[3] = 32'h7F80_0000; vb[3] = 32'h3F80_0000;   // inf + 1
    va[4] = 32'h7F80_0000; vb[4] = 32'hFF80_0000;   // inf - inf
    for (int i = 0; i < N + 2; i++) begin
      a <= (i < N) ? va[i] : 32'd0;
      b <= (i < N) ? vb[i] : 32'd0;
      @(posedge clk);
      #1;
      if (i >= 2) begin
        logic [31:0] exp;
        int j;
        j = i - 2;
        if (j == 3)      exp = 32'h7F80_0000;
        else if (j == 4) exp = 32'h7FC0_0000;
        else             exp = to_fp32(from_fp32(va[j]) + from_fp32(vb[j]));
        if (exp == 32'h8000_0000) exp = 32'd0;   // exact zero sum is +0
        check(y, exp, $sformatf("add %0d %h+%h", j, va[j], vb[j]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
