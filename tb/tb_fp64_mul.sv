// tb_fp64_mul: checks the binary64 multiplier bit-exactly against the
// simulator's own double-precision multiply, feeding a new operand pair every
// cycle and checking that each product appears exactly MUL_LAT cycles later.
// Operands are random normal numbers (exponents kept away from overflow and
// underflow) plus hand-picked special cases: zero, infinity, NaN, overflow,
// a product that needs rounding carry-out, and a result that flushes to zero.
module tb_fp64_mul;
  import sem_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  dbl_t a, b, y;
  fp64_mul dut (.clk, .a, .b, .y);

  int checks = 0, failures = 0;
  localparam int NRAND = 4000;
  localparam int NSPEC = 8;
  dbl_t exp_q[$];

  function automatic dbl_t rand_dbl(input int unsigned emin, input int unsigned emax);
    logic [51:0] m;
    logic [10:0] e;
    m = {$urandom(), $urandom()};
    e = 11'(emin + ($urandom() % (emax - emin + 1)));
    return {1'($urandom()), e, m};
  endfunction

  dbl_t sa [NSPEC] = '{64'h0000_0000_0000_0000, 64'h7FF0_0000_0000_0000, 64'h7FF0_0000_0000_0000,
                       64'h7FF8_0000_0000_0001, 64'h7FE0_0000_0000_0000, 64'h3FFF_FFFF_FFFF_FFFF,
                       64'h0010_0000_0000_0000, 64'hBFF8_0000_0000_0000};
  dbl_t sb [NSPEC] = '{64'h4000_0000_0000_0000, 64'h0000_0000_0000_0000, 64'hC000_0000_0000_0000,
                       64'h3FF0_0000_0000_0000, 64'h4010_0000_0000_0000, 64'h3FFF_FFFF_FFFF_FFFF,
                       64'h3FD0_0000_0000_0000, 64'h4004_0000_0000_0000};
  dbl_t se [NSPEC] = '{64'h0000_0000_0000_0000, 64'h7FF8_0000_0000_0000, 64'hFFF0_0000_0000_0000,
                       64'h7FF8_0000_0000_0000, 64'h7FF0_0000_0000_0000, 64'h400F_FFFF_FFFF_FFFE,
                       64'h0000_0000_0000_0000, 64'hC00E_0000_0000_0000};

  initial begin
    a = '0; b = '0;
    for (int n = 0; n < NRAND + NSPEC + MUL_LAT; n++) begin
      @(negedge clk);
      // check the product of the pair issued MUL_LAT cycles ago
      if (n >= MUL_LAT) begin
        dbl_t e;
        e = exp_q.pop_front();
        checks++;
        if (y !== e) begin
          failures++;
          if (failures < 10) $display("mul mismatch n=%0d got %h exp %h", n, y, e);
        end
      end
      if (n < NSPEC) begin
        a = sa[n]; b = sb[n];
        exp_q.push_back(se[n]);
      end else if (n < NSPEC + NRAND) begin
        a = rand_dbl(600, 1400);
        b = rand_dbl(600, 1400);
        exp_q.push_back($realtobits($bitstoreal(a) * $bitstoreal(b)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
