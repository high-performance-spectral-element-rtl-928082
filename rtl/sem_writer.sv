// sem_writer: writes finished w elements back to external memory.
//
// After a start pulse (element count, base word address of w) the writer waits
// for a full slot of the w buffer, then issues one Avalon-MM write of a
// 512-bit word (eight doubles, the first in bits 63:0) per cycle while
// waitrequest is low; element e goes to base + e*WPE, WPE = NX^3/8. The
// buffer's registered read port is addressed with the next word in advance,
// so the word on the bus is always the current one and a stalled write simply
// holds. After the last word of an element it releases the slot and, if the
// next slot is already full, continues without a gap. done pulses for one
// cycle when the last word of the last element has been accepted.
//
// Writing w back in its own loop nest follows the paper; the posted-write
// completion rule and the handshakes are this design's choices.
module sem_writer
  import sem_pkg::*;
#(
  parameter int unsigned N = 7
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  logic [31:0]          num_elem,
  input  logic [ADDR_W-1:0]    base_w,
  output logic                 busy,
  output logic                 done,
  // w-slot handshake (consumer side)
  input  logic                 c_can,
  input  slot_t                c_slot,
  output logic                 c_acq,
  output logic                 c_rel,
  // w buffer read port
  output slot_t                            w_rslot,
  output logic [$clog2((N+1)**3)-1:0]      w_raddr [WORD_DBL],
  input  dbl_t                             w_rdata [WORD_DBL],
  // memory bank
  output avm_req_t             req,
  input  avm_rsp_t             rsp
);

  localparam int unsigned NX3 = (N + 1) ** 3;
  localparam int unsigned WPE = NX3 / WORD_DBL;
  localparam int unsigned QW  = $clog2(WPE + 1);
  localparam int unsigned AW  = $clog2(NX3);

  logic              running, active;
  slot_t             slot;
  logic [QW-1:0]     q;
  logic [31:0]       e, n_elem;
  logic [ADDR_W-1:0] b_w;

  logic              active_n;
  slot_t             slot_n;
  logic [QW-1:0]     q_n;
  logic              accept, last_word, more;

  always_comb begin
    accept    = active && !rsp.waitrequest;
    last_word = (q == QW'(WPE - 1));
    more      = running && (e + (accept && last_word ? 1 : 0) < n_elem);
    active_n  = active;
    slot_n    = slot;
    q_n       = q;
    c_acq     = 1'b0;
    c_rel     = 1'b0;
    if (accept) begin
      if (last_word) begin
        c_rel    = 1'b1;
        active_n = 1'b0;
      end else begin
        q_n = q + QW'(1);
      end
    end
    if ((!active || (accept && last_word)) && more && c_can) begin
      c_acq    = 1'b1;
      active_n = 1'b1;
      slot_n   = c_slot;
      q_n      = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      active  <= 1'b0;
      slot    <= '0;
      q       <= '0;
      e       <= '0;
      n_elem  <= '0;
      done    <= 1'b0;
    end else begin
      done   <= 1'b0;
      active <= active_n;
      slot   <= slot_n;
      q      <= q_n;
      if (!running) begin
        if (start) begin
          running <= (num_elem != 0);
          done    <= (num_elem == 0);
          n_elem  <= num_elem;
          b_w     <= base_w;
          e       <= '0;
        end
      end else if (accept && last_word) begin
        e <= e + 1;
        if (e + 1 == n_elem) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy    = running;
  assign w_rslot = slot_n;
  always_comb begin
    for (int k = 0; k < WORD_DBL; k++) w_raddr[k] = AW'(int'(q_n) * WORD_DBL + k);
    req.read    = 1'b0;
    req.write   = active;
    req.address = b_w + e * WPE + ADDR_W'(q);
    for (int k = 0; k < WORD_DBL; k++) req.writedata[64*k +: 64] = w_rdata[k];
  end

endmodule
