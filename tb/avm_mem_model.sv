// avm_mem_model: behavioural model of one external memory bank with its
// controller, seen as an Avalon-MM pipelined slave without bursts.
//
// Not synthesizable logic of the accelerator: it stands in for the DDR4 bank
// and vendor memory controller of the board. It holds WORDS 512-bit words,
// accepts one read or write per cycle unless it raises waitrequest (randomly,
// wait_pct percent of cycles; the testbench may change wait_pct at any time),
// and returns read data in order exactly LAT cycles after the read was
// accepted. Counters record accepted reads and writes and cycles in which a
// request was held off.
module avm_mem_model
  import sem_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned LAT   = 6
) (
  input  logic     clk,
  input  avm_req_t req,
  output avm_rsp_t rsp
);

  logic [MEM_W-1:0] mem [WORDS];
  int unsigned wait_pct = 0;
  int unsigned n_reads = 0, n_writes = 0, n_stalls = 0;

  logic             pv [LAT];
  logic [MEM_W-1:0] pd [LAT];
  logic             wr_hold = 1'b0;

  initial begin
    for (int s = 0; s < LAT; s++) begin
      pv[s] = 1'b0;
      pd[s] = '0;
    end
  end

  always_comb begin
    rsp.waitrequest   = wr_hold;
    rsp.readdatavalid = pv[LAT-1];
    rsp.readdata      = pd[LAT-1];
  end

  always_ff @(posedge clk) begin
    for (int s = LAT - 1; s > 0; s--) begin
      pv[s] <= pv[s-1];
      pd[s] <= pd[s-1];
    end
    pv[0] <= 1'b0;
    pd[0] <= '0;
    if ((req.read || req.write) && wr_hold) n_stalls++;
    if (req.read && !wr_hold) begin
      pv[0] <= 1'b1;
      pd[0] <= mem[req.address % WORDS];
      n_reads++;
    end
    if (req.write && !wr_hold) begin
      mem[req.address % WORDS] <= req.writedata;
      n_writes++;
    end
    wr_hold <= (wait_pct != 0) && (($urandom() % 100) < wait_pct);
  end

endmodule
