// sem_bank_arb: lets a read master and a write master share one memory bank.
//
// Bank 0 carries both the u (and dx/dxt) reads of the loader and the w writes
// of the writer. Each cycle the arbiter forwards one master's command; when
// both request, they take turns (round robin), so each gets half of the bank
// and neither starves. The other master sees waitrequest high and holds its
// command, as Avalon-MM requires. Read data go to the read master only, since
// the write master never reads. Purely combinational apart from the turn bit.
//
// The paper mentions arbitration between the accelerator's Avalon masters on
// a shared bank; the round-robin policy is this design's choice.
module sem_bank_arb
  import sem_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  avm_req_t rd_req,
  output avm_rsp_t rd_rsp,
  input  avm_req_t wr_req,
  output avm_rsp_t wr_rsp,
  output avm_req_t mem_req,
  input  avm_rsp_t mem_rsp
);

  logic rd_turn;     // read master wins a tie
  logic rd_want, wr_want, grant_rd;

  always_comb begin
    rd_want  = rd_req.read;
    wr_want  = wr_req.write;
    grant_rd = rd_want && (!wr_want || rd_turn);
    mem_req  = grant_rd ? rd_req : wr_req;
    if (!rd_want && !wr_want) mem_req = '0;

    rd_rsp               = mem_rsp;
    rd_rsp.waitrequest   = !grant_rd || mem_rsp.waitrequest;
    wr_rsp               = mem_rsp;
    wr_rsp.readdatavalid = 1'b0;
    wr_rsp.waitrequest   = grant_rd || !wr_want || mem_rsp.waitrequest;
  end

  always_ff @(posedge clk) begin
    if (rst) rd_turn <= 1'b1;
    else if (rd_want && wr_want && !mem_rsp.waitrequest) rd_turn <= !grant_rd;
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (rst) !(mem_req.read && mem_req.write));

endmodule
