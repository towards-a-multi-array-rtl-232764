// tb_fp32_mul: checks the FP32 multiplier against products formed in double
// precision (exact for two single-precision operands) and rounded once to
// single precision by the testbench. Also checks the 2-cycle latency and a
// few special operands (zero, infinity, NaN).
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  localparam int N = 2000;
  logic [31:0] va[N], vb[N];

  fp32_mul dut (.clk, .a, .b, .y);

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
      va[i] = rand_fp(40);
      vb[i] = rand_fp(40);
    end
    va[0] = 32'h3F80_0000; vb[0] = 32'h4000_0000;   // 1*2
    va[1] = 32'h0000_0000; vb[1] = 32'h4040_0000;   // 0*3
    va[2] = 32'h7F80_0000; vb[2] = 32'h3F80_0000;   // inf*1
    va[3] = 32'h7F80_0000; vb[3] = 32'h0000_0000;   // inf*0
    va[4] = 32'h7F00_0000; vb[4] = 32'h7F00_0000;   // overflow
    // stream operands one per cycle; result i is sampled 2 cycles later
    for (int i = 0; i < N + 1; i++) begin
      a <= (i < N) ? va[i] : 32'd0;
      b <= (i < N) ? vb[i] : 32'd0;
      @(posedge clk);
      #1;
      if (i >= 1) begin
        logic [31:0] exp;
        int j;
        j = i - 1;
        if (j == 2)      exp = 32'h7F80_0000;
        else if (j == 3) exp = 32'h7FC0_0000;
        else if (j == 1) exp = 32'h0000_0000;
        else             exp = to_fp32(from_fp32(va[j]) * from_fp32(vb[j]));
        check(y, exp, $sformatf("mul %0d %h*%h", j, va[j], vb[j]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
