// sem_div: second phase of the local Poisson operator (kernel lines 29-41).
//
// For every point (i,j,k) it forms
//   w = sum_l dx[l+i*NX] * shur[l + j*NX + k*NX^2]
//     + sum_l dx[l+j*NX] * shus[i + l*NX + k*NX^2]
//     + sum_l dx[l+k*NX] * shut[i + j*NX + l*NX^2]
// as one dot product of 3*NX terms (the three l-sums merged into one adder
// tree). As in sem_grad, T neighbouring points along i are issued per cycle,
// an element takes NX^3/T cycles, reads are registered, and the stage starts
// only when its input slot (shur/shus/shut) is full and its output slot (w) is
// free. T results are written to the w buffer LAT cycles after their issue and
// the output slot is committed with the last group.
//
// Read ports: shur has NX ports (the row shared by the T points), shus and
// shut have T groups of NX ports (one column per point).
//
// The arithmetic follows the paper's kernel; merging the sums into one tree
// relies on the reordering the paper allows. Control is this design's own.
module sem_div
  import sem_pkg::*;
#(
  parameter int unsigned N = 7,
  parameter int unsigned T = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic in_can,
  input  slot_t in_slot,
  output logic in_acq,
  output logic in_rel,
  output slot_t                            in_rslot,
  output logic [$clog2((N+1)**3)-1:0]      ur_raddr [N+1],
  input  dbl_t                             ur_rdata [N+1],
  output logic [$clog2((N+1)**3)-1:0]      us_raddr [T*(N+1)],
  input  dbl_t                             us_rdata [T*(N+1)],
  output logic [$clog2((N+1)**3)-1:0]      ut_raddr [T*(N+1)],
  input  dbl_t                             ut_rdata [T*(N+1)],
  // derivative matrix, row-major dx[l + i*NX]
  input  dbl_t                             dx [(N+1)**2],
  input  logic out_can,
  input  slot_t out_slot,
  output logic out_acq,
  output logic out_commit,
  output logic                             w_we,
  output slot_t                            w_wslot,
  output logic [$clog2((N+1)**3/T+1)-1:0]  w_wgrp,
  output dbl_t                             w_wdata [T]
);

  localparam int unsigned NX   = N + 1;
  localparam int unsigned NX2  = NX * NX;
  localparam int unsigned NX3  = NX2 * NX;
  localparam int unsigned NG   = NX3 / T;
  localparam int unsigned GPR  = NX / T;
  localparam int unsigned AW   = $clog2(NX3);
  localparam int unsigned GW   = $clog2(NG + 1);
  localparam int unsigned LD   = MUL_LAT + tree_depth(3 * NX) * ADD_LAT;
  localparam int unsigned LAT  = 1 + LD;

  typedef struct packed {
    logic          valid;
    logic          last;
    slot_t         slot;
    logic [GW-1:0] grp;
    logic [AW-1:0] i0, j, k;
  } tag_t;

  logic          active;
  logic [GW-1:0] grp;
  slot_t         rslot, wslot;
  logic          issue, issue_last, start;
  logic [AW-1:0] i0, j, k;

  assign issue      = active;
  assign issue_last = active && (grp == GW'(NG - 1));
  assign start      = (!active || issue_last) && in_can && out_can;
  assign in_acq     = start;
  assign out_acq    = start;
  assign in_rel     = issue_last;

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      grp    <= '0;
      rslot  <= '0;
      wslot  <= '0;
    end else if (start) begin
      active <= 1'b1;
      grp    <= '0;
      rslot  <= in_slot;
      wslot  <= out_slot;
    end else if (issue_last) begin
      active <= 1'b0;
    end else if (issue) begin
      grp <= grp + GW'(1);
    end
  end

  always_comb begin
    i0 = AW'((int'(grp) % GPR) * T);
    j  = AW'((int'(grp) / GPR) % NX);
    k  = AW'(int'(grp) / (GPR * NX));
  end

  assign in_rslot = rslot;

  always_comb begin
    for (int l = 0; l < NX; l++) begin
      ur_raddr[l] = AW'(l + int'(j) * NX + int'(k) * NX2);
      for (int t = 0; t < T; t++) begin
        us_raddr[t*NX + l] = AW'(int'(i0) + t + l * NX + int'(k) * NX2);
        ut_raddr[t*NX + l] = AW'(int'(i0) + t + int'(j) * NX + l * NX2);
      end
    end
  end

  tag_t tags [LAT];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < LAT; s++) tags[s] <= '0;
    end else begin
      tags[0] <= '{valid: issue, last: issue_last, slot: wslot, grp: grp, i0: i0, j: j, k: k};
      for (int s = 1; s < LAT; s++) tags[s] <= tags[s-1];
    end
  end

  tag_t rd;
  assign rd = tags[0];

  dbl_t da [T][3*NX], db [T][3*NX];
  always_comb begin
    for (int t = 0; t < T; t++) begin
      for (int l = 0; l < NX; l++) begin
        da[t][l]        = dx[l + (int'(rd.i0) + t) * NX];
        db[t][l]        = ur_rdata[l];
        da[t][NX + l]   = dx[l + int'(rd.j) * NX];
        db[t][NX + l]   = us_rdata[t*NX + l];
        da[t][2*NX + l] = dx[l + int'(rd.k) * NX];
        db[t][2*NX + l] = ut_rdata[t*NX + l];
      end
    end
  end

  for (genvar t = 0; t < T; t++) begin : g_lane
    sem_dot #(.LEN(3 * NX)) u_w (.clk, .a(da[t]), .b(db[t]), .y(w_wdata[t]));
  end

  tag_t wb;
  assign wb         = tags[LAT-1];
  assign w_we       = wb.valid;
  assign w_wslot    = wb.slot;
  assign w_wgrp     = wb.grp;
  assign out_commit = wb.valid && wb.last;

endmodule
