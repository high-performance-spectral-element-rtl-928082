// tb_sem_loader: runs the loader against four behavioural banks holding a
// known dx, dxt, u and g0..g5 and plays the phase-1 stage as the consumer of
// the input slots. It mirrors every buffer write into shadow slots and, each
// time a slot is committed, checks that the slot holds exactly that element's
// u and six geometric-factor vectors; dx and dxt are checked at the first
// commit. Launch 1 (no stalls, consumer releases at once) checks the rate:
// banks 1-3 carry two vectors each, so one element must be committed every
// 2*NX^3/8 = 128 cycles in steady state. Launch 2 adds random bank stalls and
// a consumer that holds slots for random times.
module tb_sem_loader;
  import sem_pkg::*;

  localparam int N = 7, NX = N+1, NX2 = NX*NX, NX3 = NX2*NX, WPE = NX3/8, WDX = (NX2+7)/8;
  localparam int NS = 3, E1 = 8, E2 = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;

  logic              start, busy;
  logic [31:0]       num_elem;
  logic [ADDR_W-1:0] base_dx, base_dxt, base_u;
  logic [ADDR_W-1:0] base_g [6];
  avm_req_t          bank_req [NBANK];
  avm_rsp_t          bank_rsp [NBANK];
  logic              p_can, p_acq, p_commit, c_can, c_acq, c_rel;
  slot_t             p_slot, c_slot;
  logic              u_we;
  slot_t             u_wslot;
  logic [6:0]        u_wgrp;
  dbl_t              u_wdata [8];
  logic              g_we [6];
  slot_t             g_wslot [6];
  logic [6:0]        g_wgrp [6];
  dbl_t              g_wdata [6][8];
  dbl_t              dx [NX2], dxt [NX2];

  sem_loader #(.N(N), .NSLOT(NS)) dut (.*);
  sem_pp_ctrl #(.NSLOT(NS)) u_ctrl (.clk, .rst, .p_can, .p_slot, .p_acq, .p_commit,
    .c_can, .c_slot, .c_acq, .c_rel);
  avm_mem_model #(.WORDS(2048)) m0 (.clk, .req(bank_req[0]), .rsp(bank_rsp[0]));
  avm_mem_model #(.WORDS(2048)) m1 (.clk, .req(bank_req[1]), .rsp(bank_rsp[1]));
  avm_mem_model #(.WORDS(2048)) m2 (.clk, .req(bank_req[2]), .rsp(bank_rsp[2]));
  avm_mem_model #(.WORDS(2048)) m3 (.clk, .req(bank_req[3]), .rsp(bank_rsp[3]));

  // value stored for array a (0 = u, 1..6 = g0..g5, 7 = dx, 8 = dxt) element e, index p
  function automatic dbl_t val(input int a, input int e, input int p);
    return {8'(a), 24'(e), 32'(p)};
  endfunction

  dbl_t ub [NS][NX3];
  dbl_t gb [6][NS][NX3];
  always @(posedge clk) begin
    if (u_we) for (int q = 0; q < 8; q++) ub[u_wslot][int'(u_wgrp)*8 + q] <= u_wdata[q];
    for (int m = 0; m < 6; m++)
      if (g_we[m]) for (int q = 0; q < 8; q++) gb[m][g_wslot[m]][int'(g_wgrp[m])*8 + q] <= g_wdata[m][q];
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint commit_t [$];
  always @(posedge clk) begin
    cyc++;
    if (p_commit) commit_t.push_back(cyc);
  end

  task automatic consume(input int e0, input int ne, input int max_hold);
    for (int e = e0; e < e0 + ne; e++) begin
      @(negedge clk);
      while (!c_can) @(negedge clk);
      if (e == 0)
        for (int a = 0; a < NX2; a++) begin
          checks += 2;
          if (dx[a] !== val(7, 0, a))  begin failures++; $display("dx[%0d] wrong", a); end
          if (dxt[a] !== val(8, 0, a)) begin failures++; $display("dxt[%0d] wrong", a); end
        end
      for (int p = 0; p < NX3; p++) begin
        checks++;
        if (ub[c_slot][p] !== val(0, e, p)) begin
          failures++; if (failures < 10) $display("u e=%0d p=%0d wrong", e, p);
        end
        for (int m = 0; m < 6; m++) begin
          checks++;
          if (gb[m][c_slot][p] !== val(1 + m, e, p)) begin
            failures++; if (failures < 10) $display("g%0d e=%0d p=%0d wrong", m, e, p);
          end
        end
      end
      c_acq = 1;
      @(negedge clk);
      c_acq = 0;
      if (max_hold > 0) repeat ($urandom() % max_hold) @(negedge clk);
      c_rel = 1;
      @(negedge clk);
      c_rel = 0;
    end
  endtask

  task automatic put(input int bank, input int word, input int q, input dbl_t v);
    case (bank)
      0: m0.mem[word][64*q +: 64] = v;
      1: m1.mem[word][64*q +: 64] = v;
      2: m2.mem[word][64*q +: 64] = v;
      default: m3.mem[word][64*q +: 64] = v;
    endcase
  endtask

  task automatic launch(input int e0, input int ne, input int max_hold);
    @(negedge clk);
    num_elem = ne;
    base_u = 2*WDX + e0*WPE;
    for (int m = 0; m < 6; m++) base_g[m] = (m % 2) * (E1 + E2) * WPE + e0*WPE;
    start = 1;
    @(negedge clk);
    start = 0;
    consume(e0, ne, max_hold);
  endtask

  initial begin
    rst = 1; start = 0; num_elem = 0; c_acq = 0; c_rel = 0;
    base_dx = 0; base_dxt = WDX; base_u = 0;
    for (int m = 0; m < 6; m++) base_g[m] = 0;
    for (int a = 0; a < NX2; a++) begin
      put(0, a/8, a%8, val(7, 0, a));
      put(0, WDX + a/8, a%8, val(8, 0, a));
    end
    for (int e = 0; e < E1 + E2; e++)
      for (int p = 0; p < NX3; p++) begin
        put(0, 2*WDX + e*WPE + p/8, p%8, val(0, e, p));
        for (int m = 0; m < 6; m++) put(1 + m/2, (m%2)*(E1+E2)*WPE + e*WPE + p/8, p%8, val(1+m, e, p));
      end
    repeat (3) @(negedge clk);
    rst = 0;
    launch(0, E1, 0);
    begin
      longint worst = 0;
      for (int i = 3; i < E1; i++) if (commit_t[i] - commit_t[i-1] > worst) worst = commit_t[i] - commit_t[i-1];
      checks++;
      $display("steady-state commit period %0d cycles (expected %0d)", worst, 2 * WPE);
      if (worst > 2 * WPE) begin failures++; $display("loader too slow"); end
    end
    m0.wait_pct = 25; m1.wait_pct = 25; m2.wait_pct = 25; m3.wait_pct = 25;
    launch(E1, E2, 200);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
