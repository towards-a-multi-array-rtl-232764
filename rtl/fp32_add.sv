// fp32_add: pipelined IEEE-754 single-precision adder, the adder half of the
// PE's floating-point multiply-and-accumulate unit (FMAC).
//
// Stage 1 orders the operands by magnitude and aligns the smaller one,
// keeping guard, round and sticky bits. Stage 2 adds or subtracts the
// mantissas. Stage 3 normalises (leading-zero count and shift) and rounds to
// nearest, ties to even. A new operand pair is accepted every cycle and the
// sum appears FADD_LAT = 3 cycles later; there is no valid or stall signal.
//
// The paper only names a floating-point adder. Pipeline split, rounding mode
// and simplifications are this design's choice: subnormals are flushed to
// zero, an exact zero sum is +0, NaN inputs and inf-inf give 0x7FC00000.
module fp32_add (
  input  logic        clk,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  // ---------------- stage 1: order and align
  logic [31:0] big, sml;
  logic [7:0]  e_big, e_sml, diff;
  logic [26:0] m_big, m_sml, m_sh;
  logic        sh_sticky;
  logic        a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    a_nan = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf = (b[30:23] == 8'hFF) && (b[22:0] == 0);
    if (a[30:0] >= b[30:0]) begin
      big = a; sml = b;
    end else begin
      big = b; sml = a;
    end
    e_big = big[30:23];
    e_sml = sml[30:23];
    m_big = (e_big == 8'd0) ? 27'd0 : {1'b1, big[22:0], 3'b000};
    m_sml = (e_sml == 8'd0) ? 27'd0 : {1'b1, sml[22:0], 3'b000};
    diff  = e_big - e_sml;
    if (diff >= 8'd27) begin
      m_sh      = 27'd0;
      sh_sticky = |m_sml;
    end else begin
      m_sh      = m_sml >> diff;
      sh_sticky = |(m_sml & ~(27'h7FF_FFFF << diff));
    end
  end

  logic        s1_sign, s1_sub, s1_nan, s1_inf;
  logic [7:0]  s1_exp;
  logic [26:0] s1_mb, s1_ms;

  always_ff @(posedge clk) begin
    s1_sign <= big[31];
    s1_sub  <= big[31] ^ sml[31];
    s1_nan  <= a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]));
    s1_inf  <= a_inf || b_inf;
    s1_exp  <= e_big;
    s1_mb   <= m_big;
    s1_ms   <= {m_sh[26:1], m_sh[0] | sh_sticky};
  end

  // ---------------- stage 2: add / subtract
  logic        s2_sign, s2_nan, s2_inf;
  logic [7:0]  s2_exp;
  logic [27:0] s2_sum;

  always_ff @(posedge clk) begin
    s2_sign <= s1_sign;
    s2_nan  <= s1_nan;
    s2_inf  <= s1_inf;
    s2_exp  <= s1_exp;
    s2_sum  <= s1_sub ? ({1'b0, s1_mb} - {1'b0, s1_ms})
                      : ({1'b0, s1_mb} + {1'b0, s1_ms});
  end

  // ---------------- stage 3: normalise and round
  logic [4:0]  lz;
  logic [26:0] norm;
  logic signed [9:0] e_n, e_r;
  logic        rnd;
  logic [24:0] mant_r;

  always_comb begin
    lz = 5'd0;
    for (int i = 26; i >= 0; i--) begin
      if (s2_sum[i]) begin
        lz = 5'(26 - i);
        break;
      end
    end
    if (s2_sum[27]) begin
      norm = {s2_sum[27:2], s2_sum[1] | s2_sum[0]};
      e_n  = $signed({2'b00, s2_exp}) + 10'sd1;
    end else begin
      norm = s2_sum[26:0] << lz;
      e_n  = $signed({2'b00, s2_exp}) - $signed({5'd0, lz});
    end
    rnd    = norm[2] && ((norm[1] | norm[0]) || norm[3]);
    mant_r = {1'b0, norm[26:3]} + {24'd0, rnd};
    e_r    = mant_r[24] ? e_n + 10'sd1 : e_n;
  end

  always_ff @(posedge clk) begin
    if (s2_nan)
      y <= 32'h7FC0_0000;
    else if (s2_inf)
      y <= {s2_sign, 8'hFF, 23'd0};
    else if (s2_sum == 28'd0 || e_r <= 10'sd0)
      y <= 32'd0;
    else if (e_r >= 10'sd255)
      y <= {s2_sign, 8'hFF, 23'd0};
    else if (mant_r[24])
      y <= {s2_sign, e_r[7:0], mant_r[23:1]};
    else
      y <= {s2_sign, e_r[7:0], mant_r[22:0]};
  end

endmodule
