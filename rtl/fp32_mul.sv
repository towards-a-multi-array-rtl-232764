// fp32_mul: pipelined IEEE-754 single-precision multiplier, the multiplier
// half of the PE's floating-point multiply-and-accumulate unit (FMAC).
//
// Stage 1 unpacks the operands, adds the exponents and forms the 24x24-bit
// mantissa product. Stage 2 normalises by at most one bit and rounds to
// nearest, ties to even. The unit accepts a new operand pair every cycle and
// its result appears FMUL_LAT = 2 cycles later; it has no valid or stall
// signals, the caller carries its own control alongside.
//
// The paper only names a floating-point multiplier. The pipeline split,
// the rounding mode and the simplifications are this design's choice:
// subnormal inputs and results are flushed to signed zero, any NaN input
// or inf*0 gives the quiet NaN 0x7FC00000, overflow gives infinity.
module fp32_mul (
  input  logic        clk,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  // ---------------- stage 1
  logic        s1_sign, s1_zero, s1_inf, s1_nan;
  logic signed [9:0] s1_exp;
  logic [47:0] s1_prod;

  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    ea     = a[30:23];
    eb     = b[30:23];
    ma     = {1'b1, a[22:0]};
    mb     = {1'b1, b[22:0]};
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 23'd0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 23'd0);
  end

  always_ff @(posedge clk) begin
    s1_sign <= a[31] ^ b[31];
    s1_nan  <= a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero);
    s1_inf  <= a_inf || b_inf;
    s1_zero <= a_zero || b_zero;
    s1_exp  <= $signed({2'b00, ea}) + $signed({2'b00, eb}) - 10'sd127;
    s1_prod <= ma * mb;
  end

  // ---------------- stage 2
  logic [22:0] frac;
  logic        guard, sticky, rnd;
  logic [23:0] frac_r;
  logic signed [9:0] exp_n, exp_r;

  always_comb begin
    if (s1_prod[47]) begin
      frac   = s1_prod[46:24];
      guard  = s1_prod[23];
      sticky = |s1_prod[22:0];
      exp_n  = s1_exp + 10'sd1;
    end else begin
      frac   = s1_prod[45:23];
      guard  = s1_prod[22];
      sticky = |s1_prod[21:0];
      exp_n  = s1_exp;
    end
    rnd    = guard && (sticky || frac[0]);
    frac_r = {1'b0, frac} + {23'd0, rnd};
    exp_r  = frac_r[23] ? exp_n + 10'sd1 : exp_n;
  end

  always_ff @(posedge clk) begin
    if (s1_nan)
      y <= 32'h7FC0_0000;
    else if (s1_inf)
      y <= {s1_sign, 8'hFF, 23'd0};
    else if (s1_zero || exp_r <= 10'sd0)
      y <= {s1_sign, 31'd0};
    else if (exp_r >= 10'sd255)
      y <= {s1_sign, 8'hFF, 23'd0};
    else
      y <= {s1_sign, exp_r[7:0], frac_r[22:0]};
  end

endmodule
