// tb_sem_bank_arb: drives a read master and a write master that each raise
// random Avalon-MM commands and hold them until accepted, against a bank that
// stalls randomly. Checks, every cycle: the bank sees the command of exactly
// the master whose waitrequest is low (and nothing else); read data reach the
// read master only; when both masters wait, they take turns (neither wins
// twice in a row while the other waits); and no command waits more than a
// bounded number of cycles.
module tb_sem_bank_arb;
  import sem_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;

  avm_req_t rd_req, wr_req, mem_req;
  avm_rsp_t rd_rsp, wr_rsp, mem_rsp;

  sem_bank_arb dut (.*);

  int checks = 0, failures = 0;
  int rd_wait = 0, wr_wait = 0, both = 0;
  logic last_winner_rd;
  logic last_both;

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("%s at %0t", msg, $time);
  endtask

  initial begin
    rst = 1; rd_req = '0; wr_req = '0; mem_rsp = '0;
    last_winner_rd = 0; last_both = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 5000; n++) begin
      logic rd_acc, wr_acc;
      @(negedge clk);
      // drop the commands accepted at the last edge
      if (n > 0) begin
        if (rd_acc) rd_req.read = 0;
        if (wr_acc) wr_req.write = 0;
      end
      // keep a held command, or raise a new one
      if (!rd_req.read && ($urandom() % 4 != 0)) begin
        rd_req.read = 1; rd_req.address = $urandom();
      end
      if (!wr_req.write && ($urandom() % 4 != 0)) begin
        wr_req.write = 1; wr_req.address = $urandom(); wr_req.writedata = {16{$urandom()}};
      end
      mem_rsp.waitrequest   = ($urandom() % 5) == 0;
      mem_rsp.readdatavalid = ($urandom() % 2) == 0;
      mem_rsp.readdata      = {16{$urandom()}};
      #1;
      checks++;
      if (rd_req.read && !rd_rsp.waitrequest && (mem_req !== rd_req)) fail("read not forwarded");
      if (wr_req.write && !wr_rsp.waitrequest && (mem_req !== wr_req)) fail("write not forwarded");
      if (!rd_rsp.waitrequest && !wr_rsp.waitrequest && rd_req.read && wr_req.write) fail("both accepted");
      if (mem_rsp.waitrequest && ((rd_req.read && !rd_rsp.waitrequest) || (wr_req.write && !wr_rsp.waitrequest)))
        fail("accepted while bank stalls");
      if (!rd_req.read && !wr_req.write && (mem_req.read || mem_req.write)) fail("spurious command");
      if (rd_rsp.readdatavalid !== mem_rsp.readdatavalid || wr_rsp.readdatavalid) fail("read data misrouted");
      if (rd_req.read && wr_req.write && !mem_rsp.waitrequest) begin
        logic win_rd;
        both++;
        win_rd = !rd_rsp.waitrequest;
        if (last_both && win_rd == last_winner_rd) fail("no round robin");
        last_winner_rd = win_rd;
        last_both = 1;
      end
      // bounded waiting
      rd_wait = (rd_req.read && rd_rsp.waitrequest) ? rd_wait + 1 : 0;
      wr_wait = (wr_req.write && wr_rsp.waitrequest) ? wr_wait + 1 : 0;
      if (rd_wait > 12 || wr_wait > 12) fail("starvation");
      rd_acc = rd_req.read && !rd_rsp.waitrequest;
      wr_acc = wr_req.write && !wr_rsp.waitrequest;
    end
    checks++;
    if (both < 100) fail("too little contention");
    $display("contended cycles: %0d", both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
