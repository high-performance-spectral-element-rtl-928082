// sem_dot: pipelined dot product of two LEN-element double vectors.
//
// LEN multipliers work in parallel and an adder tree sums their products; a
// new pair of vectors may enter every cycle and the result leaves
// LAT = MUL_LAT + tree_depth(LEN) * ADD_LAT cycles later. This is the fully
// unrolled inner l-loop of the kernel with the additions reordered into a
// tree, as the paper's compiler settings allow.
module sem_dot
  import sem_pkg::*;
#(
  parameter int unsigned LEN = 8
) (
  input  logic clk,
  input  dbl_t a [LEN],
  input  dbl_t b [LEN],
  output dbl_t y
);

  dbl_t prod [LEN];

  for (genvar l = 0; l < LEN; l++) begin : g_mul
    fp64_mul u_mul (.clk, .a(a[l]), .b(b[l]), .y(prod[l]));
  end

  fp64_sum_tree #(.NIN(LEN)) u_sum (.clk, .x(prod), .y(y));

endmodule
