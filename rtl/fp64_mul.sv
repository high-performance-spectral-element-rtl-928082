// fp64_mul: pipelined IEEE-754 binary64 multiplier, one product per cycle.
//
// Stage 1 unpacks both operands, multiplies the 53-bit significands into a
// 106-bit product and adds the exponents. Stage 2 normalises the product (it
// lies in [1,4)), rounds to nearest-even using a guard bit and a sticky bit,
// and packs the result. Latency is sem_pkg::MUL_LAT = 2 cycles; a new pair may
// enter every cycle. There is no valid signal: callers carry their own.
//
// The accelerator needs double precision, a point the paper stresses; how the
// FPU is built is left to its high-level synthesis tool. The choices here are
// this design's own: subnormal inputs count as zero and results that would be
// subnormal flush to a signed zero; overflow gives infinity; any NaN operand,
// or infinity times zero, gives the quiet NaN 0x7FF8000000000000.
module fp64_mul
  import sem_pkg::*;
(
  input  logic clk,
  input  dbl_t a,
  input  dbl_t b,
  output dbl_t y
);

  // ---- stage 1: unpack and multiply ----
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [52:0] ma, mb;

  always_comb begin
    a_zero = (a[62:52] == 11'd0);
    b_zero = (b[62:52] == 11'd0);
    a_inf  = (a[62:52] == 11'h7FF) && (a[51:0] == '0);
    b_inf  = (b[62:52] == 11'h7FF) && (b[51:0] == '0);
    a_nan  = (a[62:52] == 11'h7FF) && (a[51:0] != '0);
    b_nan  = (b[62:52] == 11'h7FF) && (b[51:0] != '0);
    ma     = {1'b1, a[51:0]};
    mb     = {1'b1, b[51:0]};
  end

  logic         s1_sign, s1_zero, s1_inf, s1_nan;
  logic [12:0]  s1_exp;   // biased exponent sum minus bias, two's complement
  logic [105:0] s1_prod;

  always_ff @(posedge clk) begin
    s1_sign <= a[63] ^ b[63];
    s1_nan  <= a_nan | b_nan | (a_inf & b_zero) | (b_inf & a_zero);
    s1_inf  <= a_inf | b_inf;
    s1_zero <= a_zero | b_zero;
    s1_exp  <= 13'({2'b00, a[62:52]}) + 13'({2'b00, b[62:52]}) - 13'd1023;
    s1_prod <= ma * mb;
  end

  // ---- stage 2: normalise, round, pack ----
  logic [52:0] mant;
  logic        guard, sticky, inc;
  logic [53:0] mant_r;
  logic [12:0] exp_n, exp_r;
  dbl_t        res;

  always_comb begin
    if (s1_prod[105]) begin
      mant   = s1_prod[105:53];
      guard  = s1_prod[52];
      sticky = |s1_prod[51:0];
      exp_n  = s1_exp + 13'd1;
    end else begin
      mant   = s1_prod[104:52];
      guard  = s1_prod[51];
      sticky = |s1_prod[50:0];
      exp_n  = s1_exp;
    end
    inc    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 54'(inc);
    exp_r  = exp_n;
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_n + 13'd1;
    end
    if (s1_nan)
      res = 64'h7FF8_0000_0000_0000;
    else if (s1_inf)
      res = {s1_sign, 11'h7FF, 52'd0};
    else if (s1_zero)
      res = {s1_sign, 63'd0};
    else if (!exp_r[12] && exp_r >= 13'd2047)
      res = {s1_sign, 11'h7FF, 52'd0};           // overflow
    else if (exp_r[12] || exp_r == 13'd0)
      res = {s1_sign, 63'd0};                     // underflow, flush to zero
    else
      res = {s1_sign, exp_r[10:0], mant_r[51:0]};
  end

  always_ff @(posedge clk) y <= res;

endmodule
