// sem_lbuf: multi-buffered on-chip element memory (NSLOT slots of DEPTH doubles).
//
// One slot is filled while another is read, so that consecutive elements can
// flow through the loader, the two compute phases and the write-back without
// waiting for each other. The write port stores WL consecutive doubles per
// cycle at an aligned group index (one 512-bit memory word when WL = 8, or the
// T points computed in one cycle). The NRD read ports are registered like a
// block RAM: the data of raddr[k] appear on rdata[k] one cycle later. All read
// ports address the same slot, rslot.
//
// The paper keeps u, the six geometric-factor vectors and the intermediate
// shur/shus/shut arrays of one element in block RAM and avoids access
// arbitration by banking them; multi-buffering and the plain multi-ported
// array (which an FPGA flow would realise by replicating and banking block
// RAM) are this design's choices. The memory is not reset; rst only
// switches off the write-range assertion while upstream pipelines come out of
// reset.
module sem_lbuf
  import sem_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned NRD   = 4,
  parameter int unsigned WL    = 8,
  parameter int unsigned NSLOT = 3
) (
  input  logic                                 clk,
  input  logic                                 rst,      // only qualifies the range check
  input  logic                                 we,
  input  slot_t                                wslot,
  input  logic [$clog2(DEPTH/WL+1)-1:0]        wgrp,
  input  dbl_t                                 wdata [WL],
  input  slot_t                                rslot,
  input  logic [$clog2(DEPTH)-1:0]             raddr [NRD],
  output dbl_t                                 rdata [NRD]
);

  dbl_t mem [NSLOT][DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int w = 0; w < WL; w++) mem[wslot][int'(wgrp) * WL + w] <= wdata[w];
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NRD; k++) rdata[k] <= mem[rslot][raddr[k]];
  end

  // A write group must lie inside the memory.
  a_wgrp_range: assert property (@(posedge clk) disable iff (rst) we |-> (int'(wgrp) < DEPTH / WL && int'(wslot) < NSLOT));

endmodule
