// sem_loader: preloads each element's operands from the four memory banks.
//
// The kernel's inputs live in separate arrays, each placed on one bank:
//   bank 0: dx and dxt (read once per launch), then u
//   bank 1: gxyz vectors g0, g1     bank 2: g2, g3     bank 3: g4, g5
// Element e of a region occupies WPE = NX^3/8 consecutive 512-bit words
// starting at base + e*WPE; dx and dxt occupy ceil(NX^2/8) words each. A
// 512-bit word carries eight doubles, the first in bits 63:0.
//
// Operation: a start pulse latches the element count and base addresses.
// Whenever the input memories have a free slot the loader claims it for the
// next element (at most NSLOT elements are in flight; NSLOT is the
// number of slots of the input memories). Each bank has its own
// read master that issues one Avalon-MM read per cycle while waitrequest is
// low, for every claimed element in turn; read data return in order and are
// written straight into the u or g buffer of that element's slot, one word per
// cycle. When all four banks have returned the whole element the slot is
// committed to the compute stage. With two g vectors per bank, banks 1-3
// deliver an element in 2*WPE cycles, i.e. T = 4 points per cycle at N = 7.
// dx and dxt are kept in registers and are complete before element 0 commits.
//
// Placing each array on its own bank, reading wide coalesced words and
// splitting gxyz into six vectors follow the paper; which array goes to which
// bank, the address layout and the claim/commit protocol are this design's.
module sem_loader
  import sem_pkg::*;
#(
  parameter int unsigned N     = 7,
  parameter int unsigned NSLOT = 3
) (
  input  logic                             clk,
  input  logic                             rst,
  // launch
  input  logic                             start,
  input  logic [31:0]                      num_elem,
  input  logic [ADDR_W-1:0]                base_dx,
  input  logic [ADDR_W-1:0]                base_dxt,
  input  logic [ADDR_W-1:0]                base_u,
  input  logic [ADDR_W-1:0]                base_g [6],
  output logic                             busy,
  // memory banks
  output avm_req_t                         bank_req [NBANK],
  input  avm_rsp_t                         bank_rsp [NBANK],
  // input-slot handshake (producer side)
  input  logic                             p_can,
  input  slot_t                            p_slot,
  output logic                             p_acq,
  output logic                             p_commit,
  // buffer write ports
  output logic                             u_we,
  output slot_t                            u_wslot,
  output logic [$clog2((N+1)**3/8+1)-1:0]  u_wgrp,
  output dbl_t                             u_wdata [WORD_DBL],
  output logic                             g_we [6],
  output slot_t                            g_wslot [6],
  output logic [$clog2((N+1)**3/8+1)-1:0]  g_wgrp [6],
  output dbl_t                             g_wdata [6][WORD_DBL],
  // derivative matrices
  output dbl_t                             dx  [(N+1)**2],
  output dbl_t                             dxt [(N+1)**2]
);

  localparam int unsigned NX   = N + 1;
  localparam int unsigned NX2  = NX * NX;
  localparam int unsigned NX3  = NX2 * NX;
  localparam int unsigned WPE  = NX3 / WORD_DBL;                  // words per element per array
  localparam int unsigned WDX  = (NX2 + WORD_DBL - 1) / WORD_DBL; // words of dx (and of dxt)
  localparam int unsigned IW   = $clog2(2 * WPE + 1);
  localparam int unsigned GW   = $clog2(WPE + 1);

  logic        running;
  logic [31:0] n_elem, acq_cnt, commit_cnt;
  slot_t       slot_of [NSLOT];
  logic [ADDR_W-1:0] b_dx, b_dxt, b_u;
  logic [ADDR_W-1:0] b_g [6];

  // per-bank progress
  logic [31:0]   req_e  [NBANK];
  logic [IW-1:0] req_i  [NBANK];
  logic [31:0]   rsp_e  [NBANK];
  logic [IW-1:0] rsp_i  [NBANK];
  logic [IW-1:0] dx_req, dx_rsp;     // bank 0 only

  logic all_in;
  always_comb begin
    all_in = running && (commit_cnt < n_elem);
    for (int b = 0; b < NBANK; b++) all_in = all_in && (rsp_e[b] > commit_cnt);
  end

  assign busy     = running;
  assign p_acq    = running && (acq_cnt < n_elem) && p_can;
  assign p_commit = all_in;

  always_ff @(posedge clk) begin
    if (rst) begin
      running    <= 1'b0;
      n_elem     <= '0;
      acq_cnt    <= '0;
      commit_cnt <= '0;
      for (int s = 0; s < NSLOT; s++) slot_of[s] <= '0;
    end else if (!running) begin
      if (start) begin
        running    <= (num_elem != 0);
        n_elem     <= num_elem;
        acq_cnt    <= '0;
        commit_cnt <= '0;
        b_dx       <= base_dx;
        b_dxt      <= base_dxt;
        b_u        <= base_u;
        b_g        <= base_g;
      end
    end else begin
      if (p_acq) begin
        slot_of[acq_cnt % NSLOT] <= p_slot;
        acq_cnt             <= acq_cnt + 1;
      end
      if (p_commit) begin
        commit_cnt <= commit_cnt + 1;
        if (commit_cnt + 1 == n_elem) running <= 1'b0;
      end
    end
  end

  // number of arrays bank b streams per element
  function automatic int unsigned nreg(input int unsigned b);
    return (b == 0) ? 1 : 2;
  endfunction

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    localparam int unsigned LEN = nreg(b) * WPE;
    logic want_dx, want_el, accept, rvalid, rsp_dx_phase;
    logic [ADDR_W-1:0] addr;
    logic [GW-1:0]     word;
    logic              reg_sel;

    always_comb begin
      want_dx = (b == 0) && running && (dx_req < IW'(2 * WDX));
      want_el = running && !want_dx && (req_e[b] < acq_cnt);
      reg_sel = (req_i[b] >= IW'(WPE));
      word    = reg_sel ? GW'(req_i[b] - IW'(WPE)) : GW'(req_i[b]);
      if (want_dx)
        addr = (dx_req < IW'(WDX)) ? b_dx + ADDR_W'(dx_req) : b_dxt + ADDR_W'(dx_req - IW'(WDX));
      else if (b == 0)
        addr = b_u + req_e[b] * WPE + ADDR_W'(word);
      else
        addr = b_g[2*(b-1) + int'(reg_sel)] + req_e[b] * WPE + ADDR_W'(word);
      bank_req[b].read      = want_dx || want_el;
      bank_req[b].write     = 1'b0;
      bank_req[b].address   = addr;
      bank_req[b].writedata = '0;
    end

    assign accept       = (want_dx || want_el) && !bank_rsp[b].waitrequest;
    assign rvalid       = bank_rsp[b].readdatavalid;
    assign rsp_dx_phase = (b == 0) && (dx_rsp < IW'(2 * WDX));

    always_ff @(posedge clk) begin
      if (rst || (start && !running)) begin
        req_e[b] <= '0;
        req_i[b] <= '0;
        rsp_e[b] <= '0;
        rsp_i[b] <= '0;
      end else begin
        if (accept && !want_dx) begin
          if (req_i[b] == IW'(LEN - 1)) begin
            req_i[b] <= '0;
            req_e[b] <= req_e[b] + 1;
          end else begin
            req_i[b] <= req_i[b] + IW'(1);
          end
        end
        if (rvalid && !rsp_dx_phase) begin
          if (rsp_i[b] == IW'(LEN - 1)) begin
            rsp_i[b] <= '0;
            rsp_e[b] <= rsp_e[b] + 1;
          end else begin
            rsp_i[b] <= rsp_i[b] + IW'(1);
          end
        end
      end
    end

    if (b == 0) begin : g_u
      always_ff @(posedge clk) begin
        if (rst || (start && !running)) begin
          dx_req <= '0;
          dx_rsp <= '0;
        end else begin
          if (accept && want_dx) dx_req <= dx_req + IW'(1);
          if (rvalid && rsp_dx_phase) dx_rsp <= dx_rsp + IW'(1);
        end
      end
      // dx / dxt registers
      always_ff @(posedge clk) begin
        if (rvalid && rsp_dx_phase) begin
          for (int q = 0; q < WORD_DBL; q++) begin
            if (dx_rsp < IW'(WDX)) begin
              if (int'(dx_rsp) * WORD_DBL + q < NX2)
                dx[int'(dx_rsp) * WORD_DBL + q] <= bank_rsp[b].readdata[64*q +: 64];
            end else begin
              if ((int'(dx_rsp) - WDX) * WORD_DBL + q < NX2)
                dxt[(int'(dx_rsp) - WDX) * WORD_DBL + q] <= bank_rsp[b].readdata[64*q +: 64];
            end
          end
        end
      end
      always_comb begin
        u_we    = rvalid && !rsp_dx_phase;
        u_wslot = slot_of[rsp_e[0] % NSLOT];
        u_wgrp  = GW'(rsp_i[0]);
        for (int q = 0; q < WORD_DBL; q++) u_wdata[q] = bank_rsp[b].readdata[64*q +: 64];
      end
    end else begin : g_g
      logic rsel;
      assign rsel = (rsp_i[b] >= IW'(WPE));
      for (genvar r = 0; r < 2; r++) begin : g_reg
        localparam int unsigned M = 2*(b-1) + r;
        always_comb begin
          g_we[M]    = rvalid && (int'(rsel) == r);
          g_wslot[M] = slot_of[rsp_e[b] % NSLOT];
          g_wgrp[M]  = rsel ? GW'(rsp_i[b] - IW'(WPE)) : GW'(rsp_i[b]);
          for (int q = 0; q < WORD_DBL; q++) g_wdata[M][q] = bank_rsp[b].readdata[64*q +: 64];
        end
      end
    end
  end

  // read data only ever answers a read this loader issued
  for (genvar b = 0; b < NBANK; b++) begin : g_chk
    a_no_stray: assert property (@(posedge clk) disable iff (rst)
      bank_rsp[b].readdatavalid |-> (rsp_e[b] < acq_cnt || (b == 0 && dx_rsp < IW'(2 * WDX))));
  end

endmodule
