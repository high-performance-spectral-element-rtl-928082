// fp64_add: pipelined IEEE-754 binary64 adder, one sum per cycle.
//
// Stage 1 unpacks, orders the operands by magnitude and shifts the smaller
// significand right by the exponent difference, keeping guard, round and
// sticky bits. Stage 2 adds or subtracts the aligned significands and
// normalises the result (one right shift after a carry, or a left shift by the
// leading-zero count after cancellation). Stage 3 rounds to nearest-even and
// packs. Latency is sem_pkg::ADD_LAT = 3 cycles; a new pair may enter every
// cycle. There is no valid signal: callers carry their own.
//
// The paper asks for double precision but leaves the unit to its synthesis
// tool; the rest is this design's choice. Subnormal inputs count as zero and
// subnormal results flush to a signed zero; an exact cancellation gives +0;
// Inf - Inf and NaN operands give the quiet NaN 0x7FF8000000000000.
module fp64_add
  import sem_pkg::*;
(
  input  logic clk,
  input  dbl_t a,
  input  dbl_t b,
  output dbl_t y
);

  // ---- stage 1: classify, swap, align ----
  logic        a_nan, b_nan, a_inf, b_inf;
  logic [52:0] ma, mb;          // significands with hidden bit (0 for zero)
  logic        swap;
  logic        big_sign, sml_sign;
  logic [10:0] big_exp, sml_exp;
  logic [52:0] big_m, sml_m;
  logic [11:0] diff;
  logic [55:0] sml_sh;          // 53 bits + guard + round + sticky
  logic [108:0] sml_wide;

  always_comb begin
    a_nan = (a[62:52] == 11'h7FF) && (a[51:0] != '0);
    b_nan = (b[62:52] == 11'h7FF) && (b[51:0] != '0);
    a_inf = (a[62:52] == 11'h7FF) && (a[51:0] == '0);
    b_inf = (b[62:52] == 11'h7FF) && (b[51:0] == '0);
    ma    = (a[62:52] == 11'd0) ? 53'd0 : {1'b1, a[51:0]};
    mb    = (b[62:52] == 11'd0) ? 53'd0 : {1'b1, b[51:0]};
    swap  = {b[62:52], mb} > {a[62:52], ma};
    big_sign = swap ? b[63] : a[63];
    sml_sign = swap ? a[63] : b[63];
    big_exp  = swap ? b[62:52] : a[62:52];
    sml_exp  = swap ? a[62:52] : b[62:52];
    big_m    = swap ? mb : ma;
    sml_m    = swap ? ma : mb;
    diff     = {1'b0, big_exp} - {1'b0, sml_exp};
    // shift {sml_m, 56 zero bits} right and fold everything below guard/round
    // into the sticky bit
    sml_wide = {sml_m, 56'd0} >> ((diff > 12'd108) ? 12'd108 : diff);
    sml_sh   = {sml_wide[108:54], |sml_wide[53:0]};
  end

  logic        s1_sign, s1_sub, s1_nan, s1_inf;
  logic        s1_inf_sign;
  logic [10:0] s1_exp;
  logic [55:0] s1_big, s1_sml;

  always_ff @(posedge clk) begin
    s1_sign     <= big_sign;
    s1_sub      <= big_sign ^ sml_sign;
    s1_nan      <= a_nan | b_nan | (a_inf & b_inf & (a[63] ^ b[63]));
    s1_inf      <= a_inf | b_inf;
    s1_inf_sign <= a_inf ? a[63] : b[63];
    s1_exp      <= big_exp;
    s1_big      <= {big_m, 3'b000};
    s1_sml      <= sml_sh;
  end

  // ---- stage 2: add / subtract and normalise ----
  logic [56:0] sum;
  logic [55:0] norm;
  logic [12:0] exp2;
  logic [5:0]  lz;
  logic        found;

  always_comb begin
    if (s1_sub) sum = {1'b0, s1_big} - {1'b0, s1_sml};
    else        sum = {1'b0, s1_big} + {1'b0, s1_sml};
    lz    = '0;
    found = 1'b0;
    for (int i = 55; i >= 0; i--) begin
      if (!found && sum[i]) begin
        found = 1'b1;
        lz    = 6'(55 - i);
      end
    end
    if (sum[56]) begin
      norm = {sum[56:2], sum[1] | sum[0]};
      exp2 = {2'b00, s1_exp} + 13'd1;
    end else begin
      norm = sum[55:0] << lz;
      exp2 = {2'b00, s1_exp} - 13'(lz);
    end
  end

  logic        s2_sign, s2_nan, s2_inf, s2_inf_sign, s2_zero;
  logic [12:0] s2_exp;
  logic [55:0] s2_norm;

  always_ff @(posedge clk) begin
    s2_sign     <= s1_sign;
    s2_nan      <= s1_nan;
    s2_inf      <= s1_inf;
    s2_inf_sign <= s1_inf_sign;
    s2_zero     <= (sum == '0);
    s2_exp      <= exp2;
    s2_norm     <= norm;
  end

  // ---- stage 3: round and pack ----
  logic        inc;
  logic [53:0] mant_r;
  logic [12:0] exp3;
  dbl_t        res;

  always_comb begin
    inc    = s2_norm[2] & (s2_norm[1] | s2_norm[0] | s2_norm[3]);
    mant_r = {1'b0, s2_norm[55:3]} + 54'(inc);
    exp3   = s2_exp;
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      exp3   = s2_exp + 13'd1;
    end
    if (s2_nan)
      res = 64'h7FF8_0000_0000_0000;
    else if (s2_inf)
      res = {s2_inf_sign, 11'h7FF, 52'd0};
    else if (s2_zero)
      res = 64'd0;
    else if (!exp3[12] && exp3 >= 13'd2047)
      res = {s2_sign, 11'h7FF, 52'd0};
    else if (exp3[12] || exp3 == 13'd0)
      res = {s2_sign, 63'd0};
    else
      res = {s2_sign, exp3[10:0], mant_r[51:0]};
  end

  always_ff @(posedge clk) y <= res;

endmodule
