// fp64_sum_tree: sums NIN doubles with a balanced tree of pipelined adders.
//
// Level 0 holds the inputs; each further level adds neighbouring pairs, and an
// odd element left over at a level is carried through a delay line as long as
// an adder, so every path has the same depth. The tree accepts a new vector
// every cycle; the sum appears LAT = tree_depth(NIN) * ADD_LAT cycles later.
//
// The paper unrolls the accumulation loops of the kernel completely and allows
// the compiler to reorder floating-point additions, which is what a tree is;
// its exact shape is this design's choice. The sum therefore differs from a
// left-to-right sum in the last bits.
module fp64_sum_tree
  import sem_pkg::*;
#(
  parameter int unsigned NIN = 8
) (
  input  logic clk,
  input  dbl_t x [NIN],
  output dbl_t y
);

  localparam int unsigned DEPTH = tree_depth(NIN);
  localparam int unsigned LAT   = DEPTH * ADD_LAT;

  // number of live values at level l
  function automatic int unsigned width_at(input int unsigned l);
    int unsigned n = NIN;
    for (int unsigned i = 0; i < l; i++) n = (n + 1) / 2;
    return n;
  endfunction

  dbl_t lvl [DEPTH+1][NIN];

  for (genvar i = 0; i < NIN; i++) begin : g_in
    assign lvl[0][i] = x[i];
  end

  for (genvar l = 0; l < DEPTH; l++) begin : g_lvl
    localparam int unsigned W  = width_at(l);
    localparam int unsigned WN = width_at(l + 1);
    for (genvar i = 0; i < WN; i++) begin : g_node
      if (2*i + 1 < W) begin : g_add
        fp64_add u_add (.clk, .a(lvl[l][2*i]), .b(lvl[l][2*i+1]), .y(lvl[l+1][i]));
      end else begin : g_pass
        dbl_t dly [ADD_LAT];
        always_ff @(posedge clk) begin
          dly[0] <= lvl[l][2*i];
          for (int k = 1; k < ADD_LAT; k++) dly[k] <= dly[k-1];
        end
        assign lvl[l+1][i] = dly[ADD_LAT-1];
      end
    end
    for (genvar i = WN; i < NIN; i++) begin : g_unused
      assign lvl[l+1][i] = '0;
    end
  end

  assign y = lvl[DEPTH][0];

endmodule
