// tb_fp64_add: checks the binary64 adder bit-exactly against the simulator's
// own double-precision add, one pair per cycle, each sum expected exactly
// ADD_LAT cycles later. Random pairs cover far-apart exponents (pure
// alignment and sticky rounding), near-equal exponents with opposite signs
// (deep cancellation and left normalisation) and exact cancellation; special
// cases cover zero, infinity, Inf-Inf, NaN and overflow.
module tb_fp64_add;
  import sem_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  dbl_t a, b, y;
  fp64_add dut (.clk, .a, .b, .y);

  int checks = 0, failures = 0;
  localparam int NRAND = 6000;
  localparam int NSPEC = 7;
  dbl_t exp_q[$];

  function automatic dbl_t rand_dbl(input int unsigned emin, input int unsigned emax);
    logic [51:0] m;
    logic [10:0] e;
    m = {$urandom(), $urandom()};
    e = 11'(emin + ($urandom() % (emax - emin + 1)));
    return {1'($urandom()), e, m};
  endfunction

  dbl_t sa [NSPEC] = '{64'h0000_0000_0000_0000, 64'h7FF0_0000_0000_0000, 64'h7FF0_0000_0000_0000,
                       64'h7FF8_0000_0000_0001, 64'h7FEF_FFFF_FFFF_FFFF, 64'h3FF0_0000_0000_0000,
                       64'h4000_0000_0000_0000};
  dbl_t sb [NSPEC] = '{64'h0000_0000_0000_0000, 64'h3FF0_0000_0000_0000, 64'hFFF0_0000_0000_0000,
                       64'h3FF0_0000_0000_0000, 64'h7FEF_FFFF_FFFF_FFFF, 64'hBFF0_0000_0000_0000,
                       64'h3CB0_0000_0000_0000};
  dbl_t se [NSPEC] = '{64'h0000_0000_0000_0000, 64'h7FF0_0000_0000_0000, 64'h7FF8_0000_0000_0000,
                       64'h7FF8_0000_0000_0000, 64'h7FF0_0000_0000_0000, 64'h0000_0000_0000_0000,
                       64'h4000_0000_0000_0000};

  initial begin
    a = '0; b = '0;
    for (int n = 0; n < NRAND + NSPEC + ADD_LAT; n++) begin
      @(negedge clk);
      if (n >= ADD_LAT) begin
        dbl_t e;
        e = exp_q.pop_front();
        checks++;
        if (y !== e) begin
          failures++;
          if (failures < 10) $display("add mismatch n=%0d got %h exp %h", n, y, e);
        end
      end
      if (n < NSPEC) begin
        a = sa[n]; b = sb[n];
        exp_q.push_back(se[n]);
      end else if (n < NSPEC + NRAND) begin
        case (n % 4)
          0: begin a = rand_dbl(900, 1100); b = rand_dbl(900, 1100); end
          1: begin a = rand_dbl(1000, 1003); b = rand_dbl(1000, 1003); end
          2: begin  // nearly equal magnitudes: heavy cancellation
               a = rand_dbl(1020, 1020);
               b = {~a[63], a[62:8], 8'($urandom())};
             end
          default: begin a = rand_dbl(1000, 1000); b = {~a[63], a[62:0]}; end
        endcase
        exp_q.push_back($realtobits($bitstoreal(a) + $bitstoreal(b)));
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
