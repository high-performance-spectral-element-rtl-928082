// sem_pp_ctrl: slot bookkeeping for one multi-buffered element memory.
//
// Each of the NSLOT slots (2 would be plain double buffering) cycles FREE -> FILL -> FULL -> READ -> FREE. Slots are
// used strictly in turn, so each of the four transitions keeps its own
// pointer. A producer may acquire the next slot when it is FREE
// (p_can, p_slot) and later commit it, so it can start the next element before
// the previous one has left its pipeline. A consumer acquires a FULL slot
// (c_can, c_slot) and releases it once it has issued its last read. All
// transitions take effect at the next clock edge; reset frees all slots.
// This handshake is this design's realisation of the paper's streaming
// data-flow between loop nests.
module sem_pp_ctrl
  import sem_pkg::*;
#(
  parameter int unsigned NSLOT = 3
) (
  input  logic clk,
  input  logic rst,
  output logic p_can,
  output slot_t p_slot,
  input  logic p_acq,
  input  logic p_commit,
  output logic c_can,
  output slot_t c_slot,
  input  logic c_acq,
  input  logic c_rel
);

  slot_st_e st [NSLOT];
  slot_t pa_ptr, pc_ptr, ca_ptr, cr_ptr;

  function automatic slot_t nxt(input slot_t s);
    return (int'(s) == NSLOT - 1) ? slot_t'(0) : s + slot_t'(1);
  endfunction

  assign p_can  = (st[pa_ptr] == SLOT_FREE);
  assign p_slot = pa_ptr;
  assign c_can  = (st[ca_ptr] == SLOT_FULL);
  assign c_slot = ca_ptr;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < NSLOT; s++) st[s] <= SLOT_FREE;
      pa_ptr <= '0;
      pc_ptr <= '0;
      ca_ptr <= '0;
      cr_ptr <= '0;
    end else begin
      if (p_acq)    begin st[pa_ptr] <= SLOT_FILL; pa_ptr <= nxt(pa_ptr); end
      if (p_commit) begin st[pc_ptr] <= SLOT_FULL; pc_ptr <= nxt(pc_ptr); end
      if (c_acq)    begin st[ca_ptr] <= SLOT_READ; ca_ptr <= nxt(ca_ptr); end
      if (c_rel)    begin st[cr_ptr] <= SLOT_FREE; cr_ptr <= nxt(cr_ptr); end
    end
  end

  a_p_acq:    assert property (@(posedge clk) disable iff (rst) p_acq    |-> p_can);
  a_p_commit: assert property (@(posedge clk) disable iff (rst) p_commit |-> st[pc_ptr] == SLOT_FILL);
  a_c_acq:    assert property (@(posedge clk) disable iff (rst) c_acq    |-> c_can);
  a_c_rel:    assert property (@(posedge clk) disable iff (rst) c_rel    |-> st[cr_ptr] == SLOT_READ);

endmodule
