// tb_sem_ax_top: end-to-end test of the whole accelerator at its default size
// (N = 7, T = 4), against four behavioural memory banks.
//
// The testbench fills the banks with a random derivative matrix dx (and its
// transpose dxt), random u and random symmetric geometric factors, launches
// the kernel and compares every w value with a reference computed here in
// double precision, loop by loop as in the textbook kernel. Because the
// hardware adds in a tree, a small tolerance scaled by the sum of the
// magnitudes of the terms is allowed.
//
// Launch 1 runs with memories that never stall and checks the rate: in steady
// state one element must complete every NX^3/T cycles (T points per cycle),
// exactly. Launch 2 runs on a different set of elements with
// random waitrequest on every bank. The test also counts how often each
// mechanism of the design occurred and fails if one never did: bank 0
// contention between reads and writes, stalls by waitrequest, the loader
// blocked by full input slots, two compute phases busy on different elements
// at once, back-to-back element starts in phase 1, and a second launch.
module tb_sem_ax_top;
  import sem_pkg::*;

  localparam int N    = 7;
  localparam int T    = 4;
  localparam int NX   = N + 1;
  localparam int NX2  = NX * NX;
  localparam int NX3  = NX2 * NX;
  localparam int WPE  = NX3 / 8;
  localparam int WDX  = (NX2 + 7) / 8;
  localparam int E1   = 10;      // elements of launch 1
  localparam int E2   = 4;       // elements of launch 2
  localparam int ETOT = E1 + E2;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;

  logic              start, busy, done;
  logic [31:0]       num_elem;
  logic [ADDR_W-1:0] base_dx, base_dxt, base_u, base_w;
  logic [ADDR_W-1:0] base_g [6];
  avm_req_t          bank_req [NBANK];
  avm_rsp_t          bank_rsp [NBANK];

  sem_ax_top dut (.clk, .rst, .start, .num_elem, .base_dx, .base_dxt, .base_u, .base_g,
                  .base_w, .busy, .done, .bank_req, .bank_rsp);

  avm_mem_model #(.WORDS(4096)) m0 (.clk, .req(bank_req[0]), .rsp(bank_rsp[0]));
  avm_mem_model #(.WORDS(4096)) m1 (.clk, .req(bank_req[1]), .rsp(bank_rsp[1]));
  avm_mem_model #(.WORDS(4096)) m2 (.clk, .req(bank_req[2]), .rsp(bank_rsp[2]));
  avm_mem_model #(.WORDS(4096)) m3 (.clk, .req(bank_req[3]), .rsp(bank_rsp[3]));

  // host-side copies of the arrays
  real dxm [NX2], dxtm [NX2];
  real u  [ETOT][NX3];
  real g  [ETOT][6][NX3];
  real wref [ETOT][NX3], wtol [ETOT][NX3];

  // fixed word layout on each bank
  localparam int U_BASE  = 2 * WDX;
  localparam int W_BASE  = U_BASE + ETOT * WPE;
  function automatic int g_base(input int m);
    return (m % 2) * ETOT * WPE;
  endfunction

  int checks = 0, failures = 0;

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom() % 1000000) / 1000000.0;
  endfunction

  task automatic put(input int bank, input int word, input int slot, input real v);
    case (bank)
      0: m0.mem[word][64*slot +: 64] = $realtobits(v);
      1: m1.mem[word][64*slot +: 64] = $realtobits(v);
      2: m2.mem[word][64*slot +: 64] = $realtobits(v);
      default: m3.mem[word][64*slot +: 64] = $realtobits(v);
    endcase
  endtask

  // reference: the kernel loop by loop, plus a bound on the rounding error
  task automatic reference(input int e);
    real shur [NX3], shus [NX3], shut [NX3];
    real ar [NX3], as_ [NX3], at [NX3];
    for (int k = 0; k < NX; k++)
      for (int j = 0; j < NX; j++)
        for (int i = 0; i < NX; i++) begin
          int p;
          real r, s, t, rb, sb, tb;
          p = i + j*NX + k*NX2;
          r = 0; s = 0; t = 0; rb = 0; sb = 0; tb = 0;
          for (int l = 0; l < NX; l++) begin
            r  += dxtm[l + i*NX] * u[e][l + j*NX + k*NX2];
            s  += dxtm[l + j*NX] * u[e][i + l*NX + k*NX2];
            t  += dxtm[l + k*NX] * u[e][i + j*NX + l*NX2];
            rb += fabs(dxtm[l + i*NX] * u[e][l + j*NX + k*NX2]);
            sb += fabs(dxtm[l + j*NX] * u[e][i + l*NX + k*NX2]);
            tb += fabs(dxtm[l + k*NX] * u[e][i + j*NX + l*NX2]);
          end
          shur[p] = g[e][0][p]*r + g[e][1][p]*s + g[e][2][p]*t;
          shus[p] = g[e][1][p]*r + g[e][3][p]*s + g[e][4][p]*t;
          shut[p] = g[e][2][p]*r + g[e][4][p]*s + g[e][5][p]*t;
          ar[p]  = fabs(g[e][0][p])*rb + fabs(g[e][1][p])*sb + fabs(g[e][2][p])*tb;
          as_[p] = fabs(g[e][1][p])*rb + fabs(g[e][3][p])*sb + fabs(g[e][4][p])*tb;
          at[p]  = fabs(g[e][2][p])*rb + fabs(g[e][4][p])*sb + fabs(g[e][5][p])*tb;
        end
    for (int k = 0; k < NX; k++)
      for (int j = 0; j < NX; j++)
        for (int i = 0; i < NX; i++) begin
          int p;
          real w, wb;
          p = i + j*NX + k*NX2;
          w = 0; wb = 0;
          for (int l = 0; l < NX; l++) begin
            w  += dxm[l + i*NX] * shur[l + j*NX + k*NX2];
            w  += dxm[l + j*NX] * shus[i + l*NX + k*NX2];
            w  += dxm[l + k*NX] * shut[i + j*NX + l*NX2];
            wb += fabs(dxm[l + i*NX]) * ar[l + j*NX + k*NX2];
            wb += fabs(dxm[l + j*NX]) * as_[i + l*NX + k*NX2];
            wb += fabs(dxm[l + k*NX]) * at[i + j*NX + l*NX2];
          end
          wref[e][p] = w;
          wtol[e][p] = 1.0e-13 * wb + 1.0e-300;
        end
  endtask

  task automatic check_elems(input int e0, input int ne);
    for (int e = e0; e < e0 + ne; e++)
      for (int p = 0; p < NX3; p++) begin
        real hw;
        hw = $bitstoreal(m0.mem[W_BASE + e*WPE + p/8][64*(p%8) +: 64]);
        checks++;
        if (fabs(hw - wref[e][p]) > wtol[e][p]) begin
          failures++;
          if (failures < 10) $display("w mismatch e=%0d p=%0d got %g exp %g", e, p, hw, wref[e][p]);
        end
      end
  endtask

  // ---------------- mechanism counters ----------------
  int n_arb_conflict = 0, n_mem_stall = 0, n_slot_block = 0;
  int n_phase_overlap = 0, n_b2b_start = 0, n_launch = 0;
  longint cyc = 0;
  longint commit_t [$];

  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (dut.u_arb0.rd_want && dut.u_arb0.wr_want) n_arb_conflict++;
      for (int b = 0; b < NBANK; b++)
        if ((bank_req[b].read || bank_req[b].write) && bank_rsp[b].waitrequest) n_mem_stall++;
      if (dut.u_loader.running && dut.u_loader.acq_cnt < dut.u_loader.n_elem && !dut.in_p_can) n_slot_block++;
      if (dut.u_grad.active && dut.u_div.active) n_phase_overlap++;
      if (dut.u_grad.start && dut.u_grad.issue_last) n_b2b_start++;
      if (dut.out_p_commit) commit_t.push_back(cyc);
      if (start && !busy) n_launch++;
    end
  end

  task automatic launch(input int e0, input int ne);
    @(negedge clk);
    num_elem = ne;
    base_u   = U_BASE + e0 * WPE;
    base_w   = W_BASE + e0 * WPE;
    for (int m = 0; m < 6; m++) base_g[m] = g_base(m) + e0 * WPE;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    rst = 1'b1; start = 1'b0; num_elem = '0;
    base_dx = '0; base_dxt = WDX; base_u = '0; base_w = '0;
    for (int m = 0; m < 6; m++) base_g[m] = '0;
    // data
    for (int a = 0; a < NX2; a++) dxm[a] = rnd(-2.0, 2.0);
    for (int i = 0; i < NX; i++)
      for (int l = 0; l < NX; l++) dxtm[l + i*NX] = dxm[i + l*NX];
    for (int a = 0; a < NX2; a++) begin
      put(0, a/8, a%8, dxm[a]);
      put(0, WDX + a/8, a%8, dxtm[a]);
    end
    for (int e = 0; e < ETOT; e++)
      for (int p = 0; p < NX3; p++) begin
        u[e][p] = rnd(-1.0, 1.0);
        put(0, U_BASE + e*WPE + p/8, p%8, u[e][p]);
        for (int m = 0; m < 6; m++) begin
          g[e][m][p] = (m == 0 || m == 3 || m == 5) ? rnd(0.5, 1.5) : rnd(-0.3, 0.3);
          put(1 + m/2, g_base(m) + e*WPE + p/8, p%8, g[e][m][p]);
        end
        put(0, W_BASE + e*WPE + p/8, p%8, 0.0);
      end
    for (int e = 0; e < ETOT; e++) reference(e);
    // reset outlasts the memory read latency, so that a read issued from the
    // power-up state before the first clock edge has returned before release
    repeat (20) @(negedge clk);
    rst = 1'b0;

    // launch 1: ideal memories, check results and the element rate
    launch(0, E1);
    check_elems(0, E1);
    begin
      longint worst = 0;
      for (int i = 4; i < commit_t.size(); i++)
        if (commit_t[i] - commit_t[i-1] > worst) worst = commit_t[i] - commit_t[i-1];
      checks++;
      $display("steady-state element period %0d cycles (ideal %0d), %0d elements in %0d cycles",
               worst, NX3 / T, E1, commit_t[E1-1] - commit_t[0]);
      if (worst > NX3 / T) begin
        failures++;
        $display("rate too low: %0d cycles per element", worst);
      end
    end

    // launch 2: random stalls on all banks
    m0.wait_pct = 20; m1.wait_pct = 20; m2.wait_pct = 20; m3.wait_pct = 20;
    launch(E1, E2);
    check_elems(E1, E2);

    $display("mechanisms: arb_conflict=%0d mem_stall=%0d slot_block=%0d phase_overlap=%0d b2b_start=%0d launches=%0d",
             n_arb_conflict, n_mem_stall, n_slot_block, n_phase_overlap, n_b2b_start, n_launch);
    checks += 6;
    if (n_arb_conflict  == 0) begin failures++; $display("no bank-0 contention seen"); end
    if (n_mem_stall     == 0) begin failures++; $display("no memory stall seen"); end
    if (n_slot_block    == 0) begin failures++; $display("loader never blocked by full slots"); end
    if (n_phase_overlap == 0) begin failures++; $display("phases never overlapped"); end
    if (n_b2b_start     == 0) begin failures++; $display("no back-to-back element start"); end
    if (n_launch        != 2) begin failures++; $display("expected two launches"); end
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
