// tb_sem_lbuf: writes random groups into random slots of a small 3-slot
// buffer (64 doubles, 8 per write, 3 read ports) while reading random
// addresses of random slots, and checks every read against a shadow copy,
// one cycle after the address (registered read). Writes and reads to the same
// word in the same cycle are avoided, as in the accelerator.
module tb_sem_lbuf;
  import sem_pkg::*;

  localparam int DEPTH = 64, NRD = 3, WL = 8, NS = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst = 1'b0;
  logic          we;
  slot_t         wslot, rslot;
  logic [3:0]    wgrp;
  dbl_t          wdata [WL];
  logic [5:0]    raddr [NRD];
  dbl_t          rdata [NRD];

  sem_lbuf #(.DEPTH(DEPTH), .NRD(NRD), .WL(WL), .NSLOT(NS)) dut (.*);

  dbl_t shadow [NS][DEPTH];
  logic known [NS][DEPTH];
  int checks = 0, failures = 0;

  initial begin
    dbl_t exp_d [NRD];
    logic exp_v [NRD];
    for (int s = 0; s < NS; s++) for (int a = 0; a < DEPTH; a++) known[s][a] = 1'b0;
    for (int k = 0; k < NRD; k++) exp_v[k] = 1'b0;
    we = 0; wslot = 0; rslot = 0; wgrp = 0;
    foreach (wdata[i]) wdata[i] = '0;
    foreach (raddr[i]) raddr[i] = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // reads issued last cycle
      for (int k = 0; k < NRD; k++) if (exp_v[k]) begin
        checks++;
        if (rdata[k] !== exp_d[k]) begin
          failures++;
          if (failures < 10) $display("read mismatch port %0d got %h exp %h", k, rdata[k], exp_d[k]);
        end
      end
      // new write
      we    = ($urandom() % 2) == 0;
      wslot = slot_t'($urandom() % NS);
      wgrp  = 4'($urandom() % (DEPTH / WL));
      foreach (wdata[i]) wdata[i] = {$urandom(), $urandom()};
      // new reads, from another slot than the one being written
      rslot = slot_t'((int'(wslot) + 1 + $urandom() % (NS - 1)) % NS);
      for (int k = 0; k < NRD; k++) begin
        raddr[k] = 6'($urandom() % DEPTH);
        exp_v[k] = known[rslot][raddr[k]];
        exp_d[k] = shadow[rslot][raddr[k]];
      end
      if (we) for (int i = 0; i < WL; i++) begin
        shadow[wslot][int'(wgrp) * WL + i] = wdata[i];
        known[wslot][int'(wgrp) * WL + i]  = 1'b1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
