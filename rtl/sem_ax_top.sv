// sem_ax_top: double-precision accelerator for the spectral-element Poisson
// operator w = Ax, evaluated element by element without forming A.
//
// For each element of polynomial degree N (NX^3 points, NX = N+1) the design
// computes, from the element's solution values u, six geometric factors g0..g5
// per point and the 1-D derivative matrix dx (and its transpose dxt):
//   phase 1 (sem_grad): r,s,t = derivatives of u along the three directions,
//                       (shur,shus,shut) = G * (r,s,t)
//   phase 2 (sem_div):  w = dx^T-weighted sums of shur, shus, shut.
// The element flows through four stages, each working on a different element
// at the same time, with a multi-buffered memory between neighbours. Each
// memory has NSLOT = 3 slots: one being filled, one being read, and one
// holding a finished element while its producer's pipeline drains, so that
// no stage waits for its neighbour's latency:
//
//   banks 0-3 --> sem_loader --[u,g0..g5]--> sem_grad --[shur,shus,shut]-->
//                 sem_div --[w]--> sem_writer --> bank 0
//
// Every stage moves T points (or one 512-bit word per bank) per cycle, so at
// N = 7, T = 4 the steady state is one element every NX^3/T = 128 cycles, i.e.
// T points per cycle; banks 1-3 each stream two geometric-factor arrays and
// bank 0 carries u reads and w writes under a round-robin arbiter.
//
// Interface: a start pulse with the element count and the base word address
// of each array launches the kernel; done pulses when the last w word has been
// accepted by bank 0; busy is high in between. The four bank ports are
// Avalon-MM pipelined masters (sem_pkg). Reset is synchronous and active high.
//
// The algorithm, double precision, T points per cycle with initiation interval
// 1, on-chip buffering of one element and one array per bank come from the
// paper; the stage handshakes, buffer organisation and bank assignment are
// this design's choices.
module sem_ax_top
  import sem_pkg::*;
#(
  parameter int unsigned N = 7,
  parameter int unsigned T = 4,
  parameter int unsigned NSLOT = 3
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [31:0]       num_elem,
  input  logic [ADDR_W-1:0] base_dx,
  input  logic [ADDR_W-1:0] base_dxt,
  input  logic [ADDR_W-1:0] base_u,
  input  logic [ADDR_W-1:0] base_g [6],
  input  logic [ADDR_W-1:0] base_w,
  output logic              busy,
  output logic              done,
  output avm_req_t          bank_req [NBANK],
  input  avm_rsp_t          bank_rsp [NBANK]
);

  localparam int unsigned NX  = N + 1;
  localparam int unsigned NX2 = NX * NX;
  localparam int unsigned NX3 = NX2 * NX;
  localparam int unsigned AW  = $clog2(NX3);
  localparam int unsigned NUR = NX * (2 * T + 1);

  // ---------------- loader and bank 0 sharing ----------------
  avm_req_t ld_req [NBANK];
  avm_rsp_t ld_rsp [NBANK];
  avm_req_t wr_req;
  avm_rsp_t wr_rsp;
  logic     ld_busy, wr_busy;

  logic in_p_can, in_p_acq, in_p_commit;
  slot_t in_p_slot, in_c_slot;
  logic in_c_can, in_c_acq, in_c_rel;

  logic                           u_we;
  slot_t                          u_wslot;
  logic [$clog2(NX3/8+1)-1:0]     u_wgrp;
  dbl_t                           u_wdata [WORD_DBL];
  logic                           g_we [6];
  slot_t                          g_wslot [6];
  logic [$clog2(NX3/8+1)-1:0]     g_wgrp [6];
  dbl_t                           g_wdata [6][WORD_DBL];
  dbl_t                           dx [NX2], dxt [NX2];

  sem_loader #(.N(N), .NSLOT(NSLOT)) u_loader (
    .clk, .rst, .start, .num_elem, .base_dx, .base_dxt, .base_u, .base_g,
    .busy(ld_busy), .bank_req(ld_req), .bank_rsp(ld_rsp),
    .p_can(in_p_can), .p_slot(in_p_slot), .p_acq(in_p_acq), .p_commit(in_p_commit),
    .u_we, .u_wslot, .u_wgrp, .u_wdata, .g_we, .g_wslot, .g_wgrp, .g_wdata,
    .dx, .dxt
  );

  sem_bank_arb u_arb0 (
    .clk, .rst, .rd_req(ld_req[0]), .rd_rsp(ld_rsp[0]), .wr_req, .wr_rsp,
    .mem_req(bank_req[0]), .mem_rsp(bank_rsp[0])
  );

  for (genvar b = 1; b < NBANK; b++) begin : g_bank
    assign bank_req[b] = ld_req[b];
    assign ld_rsp[b]   = bank_rsp[b];
  end

  // ---------------- input memories (u, g0..g5) ----------------
  sem_pp_ctrl #(.NSLOT(NSLOT)) u_in_ctrl (
    .clk, .rst,
    .p_can(in_p_can), .p_slot(in_p_slot), .p_acq(in_p_acq), .p_commit(in_p_commit),
    .c_can(in_c_can), .c_slot(in_c_slot), .c_acq(in_c_acq), .c_rel(in_c_rel)
  );

  slot_t           in_rslot;
  logic [AW-1:0]   u_raddr [NUR];
  dbl_t            u_rdata [NUR];
  logic [AW-1:0]   g_raddr [T];
  dbl_t            g_rdata [6][T];

  sem_lbuf #(.DEPTH(NX3), .NRD(NUR), .WL(WORD_DBL), .NSLOT(NSLOT)) u_ubuf (
    .clk, .rst, .we(u_we), .wslot(u_wslot), .wgrp(u_wgrp), .wdata(u_wdata),
    .rslot(in_rslot), .raddr(u_raddr), .rdata(u_rdata)
  );

  for (genvar m = 0; m < 6; m++) begin : g_gbuf
    sem_lbuf #(.DEPTH(NX3), .NRD(T), .WL(WORD_DBL), .NSLOT(NSLOT)) u_gbuf (
      .clk, .rst, .we(g_we[m]), .wslot(g_wslot[m]), .wgrp(g_wgrp[m]), .wdata(g_wdata[m]),
      .rslot(in_rslot), .raddr(g_raddr), .rdata(g_rdata[m])
    );
  end

  // ---------------- phase 1 ----------------
  logic mid_p_can, mid_p_acq, mid_p_commit;
  slot_t mid_p_slot, mid_c_slot;
  logic mid_c_can, mid_c_acq, mid_c_rel;
  logic                         mid_we;
  slot_t                        mid_wslot;
  logic [$clog2(NX3/T+1)-1:0]   mid_wgrp;
  dbl_t                         shur_wdata [T], shus_wdata [T], shut_wdata [T];

  sem_grad #(.N(N), .T(T)) u_grad (
    .clk, .rst,
    .in_can(in_c_can), .in_slot(in_c_slot), .in_acq(in_c_acq), .in_rel(in_c_rel),
    .in_rslot, .u_raddr, .u_rdata, .g_raddr, .g_rdata, .dxt,
    .out_can(mid_p_can), .out_slot(mid_p_slot), .out_acq(mid_p_acq), .out_commit(mid_p_commit),
    .mid_we, .mid_wslot, .mid_wgrp, .shur_wdata, .shus_wdata, .shut_wdata
  );

  // ---------------- intermediate memories (shur, shus, shut) ----------------
  sem_pp_ctrl #(.NSLOT(NSLOT)) u_mid_ctrl (
    .clk, .rst,
    .p_can(mid_p_can), .p_slot(mid_p_slot), .p_acq(mid_p_acq), .p_commit(mid_p_commit),
    .c_can(mid_c_can), .c_slot(mid_c_slot), .c_acq(mid_c_acq), .c_rel(mid_c_rel)
  );

  slot_t         mid_rslot;
  logic [AW-1:0] ur_raddr [NX], us_raddr [T*NX], ut_raddr [T*NX];
  dbl_t          ur_rdata [NX], us_rdata [T*NX], ut_rdata [T*NX];

  sem_lbuf #(.DEPTH(NX3), .NRD(NX), .WL(T), .NSLOT(NSLOT)) u_shur (
    .clk, .rst, .we(mid_we), .wslot(mid_wslot), .wgrp(mid_wgrp), .wdata(shur_wdata),
    .rslot(mid_rslot), .raddr(ur_raddr), .rdata(ur_rdata)
  );
  sem_lbuf #(.DEPTH(NX3), .NRD(T*NX), .WL(T), .NSLOT(NSLOT)) u_shus (
    .clk, .rst, .we(mid_we), .wslot(mid_wslot), .wgrp(mid_wgrp), .wdata(shus_wdata),
    .rslot(mid_rslot), .raddr(us_raddr), .rdata(us_rdata)
  );
  sem_lbuf #(.DEPTH(NX3), .NRD(T*NX), .WL(T), .NSLOT(NSLOT)) u_shut (
    .clk, .rst, .we(mid_we), .wslot(mid_wslot), .wgrp(mid_wgrp), .wdata(shut_wdata),
    .rslot(mid_rslot), .raddr(ut_raddr), .rdata(ut_rdata)
  );

  // ---------------- phase 2 ----------------
  logic out_p_can, out_p_acq, out_p_commit;
  slot_t out_p_slot, out_c_slot;
  logic out_c_can, out_c_acq, out_c_rel;
  logic                         w_we;
  slot_t                        w_wslot;
  logic [$clog2(NX3/T+1)-1:0]   w_wgrp;
  dbl_t                         w_wdata [T];

  sem_div #(.N(N), .T(T)) u_div (
    .clk, .rst,
    .in_can(mid_c_can), .in_slot(mid_c_slot), .in_acq(mid_c_acq), .in_rel(mid_c_rel),
    .in_rslot(mid_rslot), .ur_raddr, .ur_rdata, .us_raddr, .us_rdata, .ut_raddr, .ut_rdata,
    .dx,
    .out_can(out_p_can), .out_slot(out_p_slot), .out_acq(out_p_acq), .out_commit(out_p_commit),
    .w_we, .w_wslot, .w_wgrp, .w_wdata
  );

  // ---------------- output memory (w) and write-back ----------------
  sem_pp_ctrl #(.NSLOT(NSLOT)) u_out_ctrl (
    .clk, .rst,
    .p_can(out_p_can), .p_slot(out_p_slot), .p_acq(out_p_acq), .p_commit(out_p_commit),
    .c_can(out_c_can), .c_slot(out_c_slot), .c_acq(out_c_acq), .c_rel(out_c_rel)
  );

  slot_t         w_rslot;
  logic [AW-1:0] w_raddr [WORD_DBL];
  dbl_t          w_rdata [WORD_DBL];

  sem_lbuf #(.DEPTH(NX3), .NRD(WORD_DBL), .WL(T), .NSLOT(NSLOT)) u_wbuf (
    .clk, .rst, .we(w_we), .wslot(w_wslot), .wgrp(w_wgrp), .wdata(w_wdata),
    .rslot(w_rslot), .raddr(w_raddr), .rdata(w_rdata)
  );

  sem_writer #(.N(N)) u_writer (
    .clk, .rst, .start, .num_elem, .base_w, .busy(wr_busy), .done,
    .c_can(out_c_can), .c_slot(out_c_slot), .c_acq(out_c_acq), .c_rel(out_c_rel),
    .w_rslot, .w_raddr, .w_rdata, .req(wr_req), .rsp(wr_rsp)
  );

  assign busy = ld_busy || wr_busy;

endmodule
