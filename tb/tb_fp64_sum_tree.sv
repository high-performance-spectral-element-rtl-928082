// tb_fp64_sum_tree: feeds a random vector every cycle into two trees, one of 8
// terms (the default) and one of 5 terms (exercises the carry-through of odd
// leftovers), and checks each sum bit-exactly, exactly 9 cycles later (three
// adder levels of 3 cycles each). The expected value is the same pairwise
// summation order computed with the simulator's double arithmetic.
module tb_fp64_sum_tree;
  import sem_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int LAT  = 9;
  localparam int NVEC = 2000;

  dbl_t x8 [8];
  dbl_t x5 [5];
  dbl_t y8, y5;

  fp64_sum_tree #(.NIN(8)) dut8 (.clk, .x(x8), .y(y8));
  fp64_sum_tree #(.NIN(5)) dut5 (.clk, .x(x5), .y(y5));

  int checks = 0, failures = 0;
  dbl_t q8[$], q5[$];

  function automatic dbl_t rnd();
    return {1'($urandom()), 11'(1013 + $urandom() % 20), 20'($urandom()), 32'($urandom())};
  endfunction
  function automatic real r(input dbl_t v);
    return $bitstoreal(v);
  endfunction

  initial begin
    foreach (x8[i]) x8[i] = '0;
    foreach (x5[i]) x5[i] = '0;
    for (int n = 0; n < NVEC + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        dbl_t e8, e5;
        e8 = q8.pop_front();
        e5 = q5.pop_front();
        checks += 2;
        if (y8 !== e8) begin failures++; if (failures < 10) $display("8-tree n=%0d got %h exp %h", n, y8, e8); end
        if (y5 !== e5) begin failures++; if (failures < 10) $display("5-tree n=%0d got %h exp %h", n, y5, e5); end
      end
      if (n < NVEC) begin
        real p0, p1, p2, p3, q0, q1;
        foreach (x8[i]) x8[i] = rnd();
        foreach (x5[i]) x5[i] = rnd();
        // 8 terms: ((x0+x1)+(x2+x3)) + ((x4+x5)+(x6+x7))
        p0 = r(x8[0]) + r(x8[1]); p1 = r(x8[2]) + r(x8[3]);
        p2 = r(x8[4]) + r(x8[5]); p3 = r(x8[6]) + r(x8[7]);
        q0 = p0 + p1; q1 = p2 + p3;
        q8.push_back($realtobits(q0 + q1));
        // 5 terms: ((x0+x1)+(x2+x3)) + x4
        p0 = r(x5[0]) + r(x5[1]); p1 = r(x5[2]) + r(x5[3]);
        q0 = p0 + p1;
        q5.push_back($realtobits(q0 + r(x5[4])));
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
