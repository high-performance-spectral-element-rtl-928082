// sem_grad: first phase of the local Poisson operator (kernel lines 8-28).
//
// For every point (i,j,k) of an element it forms the three reference-space
// derivatives
//   r = sum_l dxt[l+i*NX] * u[l + j*NX + k*NX^2]
//   s = sum_l dxt[l+j*NX] * u[i + l*NX + k*NX^2]
//   t = sum_l dxt[l+k*NX] * u[i + j*NX + l*NX^2]
// and multiplies them by the symmetric 3x3 geometric-factor tensor g0..g5:
//   shur = g0 r + g1 s + g2 t,  shus = g1 r + g3 s + g4 t,  shut = g2 r + g4 s + g5 t.
//
// T points that are neighbours along i are issued every cycle (T divides
// NX = N+1), so an element takes NX^3/T cycles and the stage never stalls: it
// starts only when its input slot is full and its output slot is free, and it
// may start the next element in the cycle after it issued the last group of
// the previous one. Buffer reads are registered (one cycle), the l-sums are
// sem_dot units and the tensor product is three 3-term sem_dot units; the
// geometric factors travel through a delay line to meet the sums. A write of
// T results to the shur/shus/shut buffers leaves LAT cycles after its issue;
// the output slot is committed when the last group has been written.
//
// Read-port layout of the u buffer: ports 0..NX-1 hold the row for r, then
// T groups of NX for s, then T groups of NX for t. The six geometric-factor
// buffers are read at the same T addresses.
//
// Unrolling the l-loop fully, issuing T points per cycle with II = 1 and
// reordering sums follow the paper; the issue order, the slot handshake and
// the latencies are this design's choices.
module sem_grad
  import sem_pkg::*;
#(
  parameter int unsigned N = 7,
  parameter int unsigned T = 4
) (
  input  logic clk,
  input  logic rst,
  // input (u, g) slot handshake
  input  logic in_can,
  input  slot_t in_slot,
  output logic in_acq,
  output logic in_rel,
  // u and geometric factor buffer reads
  output slot_t                            in_rslot,
  output logic [$clog2((N+1)**3)-1:0]      u_raddr [(N+1)*(2*T+1)],
  input  dbl_t                             u_rdata [(N+1)*(2*T+1)],
  output logic [$clog2((N+1)**3)-1:0]      g_raddr [T],
  input  dbl_t                             g_rdata [6][T],
  // derivative matrix (transposed), row-major dxt[l + i*NX]
  input  dbl_t                             dxt [(N+1)**2],
  // output (shur/shus/shut) slot handshake and writes
  input  logic out_can,
  input  slot_t out_slot,
  output logic out_acq,
  output logic out_commit,
  output logic                             mid_we,
  output slot_t                            mid_wslot,
  output logic [$clog2((N+1)**3/T+1)-1:0]  mid_wgrp,
  output dbl_t                             shur_wdata [T],
  output dbl_t                             shus_wdata [T],
  output dbl_t                             shut_wdata [T]
);

  localparam int unsigned NX   = N + 1;
  localparam int unsigned NX2  = NX * NX;
  localparam int unsigned NX3  = NX2 * NX;
  localparam int unsigned NG   = NX3 / T;         // groups per element
  localparam int unsigned GPR  = NX / T;          // groups per row
  localparam int unsigned AW   = $clog2(NX3);
  localparam int unsigned GW   = $clog2(NG + 1);
  localparam int unsigned LD   = MUL_LAT + tree_depth(NX) * ADD_LAT;
  localparam int unsigned LG   = MUL_LAT + tree_depth(3) * ADD_LAT;
  localparam int unsigned LAT  = 1 + LD + LG;

  typedef struct packed {
    logic          valid;
    logic          last;
    slot_t         slot;
    logic [GW-1:0] grp;
    logic [AW-1:0] i0, j, k;
  } tag_t;

  // ---------------- issue ----------------
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
      u_raddr[l] = AW'(l + int'(j) * NX + int'(k) * NX2);
      for (int t = 0; t < T; t++) begin
        u_raddr[NX + t*NX + l]        = AW'(int'(i0) + t + l * NX + int'(k) * NX2);
        u_raddr[NX + (T+t)*NX + l]    = AW'(int'(i0) + t + int'(j) * NX + l * NX2);
      end
    end
    for (int t = 0; t < T; t++) g_raddr[t] = AW'(int'(i0) + t + int'(j) * NX + int'(k) * NX2);
  end

  // ---------------- tag pipeline ----------------
  tag_t tags [LAT];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < LAT; s++) tags[s] <= '0;
    end else begin
      tags[0] <= '{valid: issue, last: issue_last, slot: wslot, grp: grp, i0: i0, j: j, k: k};
      for (int s = 1; s < LAT; s++) tags[s] <= tags[s-1];
    end
  end

  // ---------------- derivatives ----------------
  tag_t rd;   // tag of the cycle whose buffer data is on the read ports
  assign rd = tags[0];

  dbl_t dr_a [T][NX], dr_b [T][NX];
  dbl_t ds_a [T][NX], ds_b [T][NX];
  dbl_t dt_a [T][NX], dt_b [T][NX];

  always_comb begin
    for (int t = 0; t < T; t++) begin
      for (int l = 0; l < NX; l++) begin
        dr_a[t][l] = dxt[l + (int'(rd.i0) + t) * NX];
        dr_b[t][l] = u_rdata[l];
        ds_a[t][l] = dxt[l + int'(rd.j) * NX];
        ds_b[t][l] = u_rdata[NX + t*NX + l];
        dt_a[t][l] = dxt[l + int'(rd.k) * NX];
        dt_b[t][l] = u_rdata[NX + (T+t)*NX + l];
      end
    end
  end

  dbl_t rv [T], sv [T], tv [T];
  for (genvar t = 0; t < T; t++) begin : g_lane
    sem_dot #(.LEN(NX)) u_r (.clk, .a(dr_a[t]), .b(dr_b[t]), .y(rv[t]));
    sem_dot #(.LEN(NX)) u_s (.clk, .a(ds_a[t]), .b(ds_b[t]), .y(sv[t]));
    sem_dot #(.LEN(NX)) u_t (.clk, .a(dt_a[t]), .b(dt_b[t]), .y(tv[t]));
  end

  // geometric factors wait LD cycles for the sums
  dbl_t gd [LD][6][T];
  always_ff @(posedge clk) begin
    gd[0] <= g_rdata;
    for (int s = 1; s < LD; s++) gd[s] <= gd[s-1];
  end

  // ---------------- tensor product ----------------
  dbl_t gr_a [T][3], gs_a [T][3], gt_a [T][3], rst_b [T][3];
  always_comb begin
    for (int t = 0; t < T; t++) begin
      rst_b[t] = '{rv[t], sv[t], tv[t]};
      gr_a[t]  = '{gd[LD-1][0][t], gd[LD-1][1][t], gd[LD-1][2][t]};
      gs_a[t]  = '{gd[LD-1][1][t], gd[LD-1][3][t], gd[LD-1][4][t]};
      gt_a[t]  = '{gd[LD-1][2][t], gd[LD-1][4][t], gd[LD-1][5][t]};
    end
  end

  for (genvar t = 0; t < T; t++) begin : g_geo
    sem_dot #(.LEN(3)) u_ur (.clk, .a(gr_a[t]), .b(rst_b[t]), .y(shur_wdata[t]));
    sem_dot #(.LEN(3)) u_us (.clk, .a(gs_a[t]), .b(rst_b[t]), .y(shus_wdata[t]));
    sem_dot #(.LEN(3)) u_ut (.clk, .a(gt_a[t]), .b(rst_b[t]), .y(shut_wdata[t]));
  end

  // ---------------- write-back to the shur/shus/shut buffers ----------------
  tag_t wb;
  assign wb         = tags[LAT-1];
  assign mid_we     = wb.valid;
  assign mid_wslot  = wb.slot;
  assign mid_wgrp   = wb.grp;
  assign out_commit = wb.valid && wb.last;

endmodule
