// tb_sem_grad: phase 1 on two elements back to back at the default size
// (N = 7, T = 4). The testbench models the input buffers (registered reads)
// holding random u and geometric factors in slots 1 and 2, a random dxt, and
// free output slots 0 and 1. It checks every shur/shus/shut value against a
// loop-by-loop double-precision reference with a tolerance scaled by the sum
// of term magnitudes, that the first results are written exactly LAT = 20
// cycles after the first group is issued, that the two elements' 2*128 groups
// are written in 256 consecutive cycles (T points per cycle), that each group
// goes to the right slot, and that each output slot is committed once.
module tb_sem_grad;
  import sem_pkg::*;

  localparam int N = 7, T = 4, NX = N+1, NX2 = NX*NX, NX3 = NX2*NX, NG = NX3/T;
  localparam int NUR = NX*(2*T+1), LAT = 1 + (MUL_LAT + 3*ADD_LAT) + (MUL_LAT + 2*ADD_LAT);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;

  logic in_can, in_acq, in_rel, out_can, out_acq, out_commit;
  slot_t in_slot, out_slot, in_rslot, mid_wslot;
  logic [8:0] u_raddr [NUR];
  dbl_t       u_rdata [NUR];
  logic [8:0] g_raddr [T];
  dbl_t       g_rdata [6][T];
  dbl_t       dxt [NX2];
  logic       mid_we;
  logic [7:0] mid_wgrp;
  dbl_t       shur_wdata [T], shus_wdata [T], shut_wdata [T];

  sem_grad #(.N(N), .T(T)) dut (.*);

  real u [3][NX3];
  real g [3][6][NX3];
  real dxtm [NX2];
  dbl_t ub [3][NX3];
  dbl_t gb [3][6][NX3];

  always_ff @(posedge clk) begin
    for (int k = 0; k < NUR; k++) u_rdata[k] <= ub[in_rslot][u_raddr[k]];
    for (int m = 0; m < 6; m++) for (int t = 0; t < T; t++) g_rdata[m][t] <= gb[in_rslot][m][g_raddr[t]];
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom() % 1000000) / 1000000.0;
  endfunction

  int checks = 0, failures = 0;
  longint cyc = 0, first_issue = -1, first_write = -1, last_write = -1;
  int n_writes = 0, n_commit = 0;
  dbl_t mr [3][NX3], ms [3][NX3], mt [3][NX3];

  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (dut.issue && first_issue < 0) first_issue = cyc;
      if (mid_we) begin
        if (first_write < 0) first_write = cyc;
        last_write = cyc;
        n_writes++;
        for (int t = 0; t < T; t++) begin
          mr[mid_wslot][int'(mid_wgrp)*T + t] = shur_wdata[t];
          ms[mid_wslot][int'(mid_wgrp)*T + t] = shus_wdata[t];
          mt[mid_wslot][int'(mid_wgrp)*T + t] = shut_wdata[t];
        end
      end
      if (out_commit) n_commit++;
    end
  end

  task automatic check_elem(input int s_in, input int s_out);
    for (int k = 0; k < NX; k++) for (int j = 0; j < NX; j++) for (int i = 0; i < NX; i++) begin
      int p;
      real r, s, t, rb, sb, tb, e[3], b[3], hw[3];
      p = i + j*NX + k*NX2;
      r = 0; s = 0; t = 0; rb = 0; sb = 0; tb = 0;
      for (int l = 0; l < NX; l++) begin
        r += dxtm[l + i*NX] * u[s_in][l + j*NX + k*NX2];  rb += fabs(dxtm[l + i*NX] * u[s_in][l + j*NX + k*NX2]);
        s += dxtm[l + j*NX] * u[s_in][i + l*NX + k*NX2];  sb += fabs(dxtm[l + j*NX] * u[s_in][i + l*NX + k*NX2]);
        t += dxtm[l + k*NX] * u[s_in][i + j*NX + l*NX2];  tb += fabs(dxtm[l + k*NX] * u[s_in][i + j*NX + l*NX2]);
      end
      e[0] = g[s_in][0][p]*r + g[s_in][1][p]*s + g[s_in][2][p]*t;
      e[1] = g[s_in][1][p]*r + g[s_in][3][p]*s + g[s_in][4][p]*t;
      e[2] = g[s_in][2][p]*r + g[s_in][4][p]*s + g[s_in][5][p]*t;
      b[0] = fabs(g[s_in][0][p])*rb + fabs(g[s_in][1][p])*sb + fabs(g[s_in][2][p])*tb;
      b[1] = fabs(g[s_in][1][p])*rb + fabs(g[s_in][3][p])*sb + fabs(g[s_in][4][p])*tb;
      b[2] = fabs(g[s_in][2][p])*rb + fabs(g[s_in][4][p])*sb + fabs(g[s_in][5][p])*tb;
      hw[0] = $bitstoreal(mr[s_out][p]); hw[1] = $bitstoreal(ms[s_out][p]); hw[2] = $bitstoreal(mt[s_out][p]);
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (fabs(hw[c] - e[c]) > 1.0e-13 * b[c] + 1.0e-300) begin
          failures++;
          if (failures < 10) $display("slot %0d p=%0d comp %0d got %g exp %g", s_out, p, c, hw[c], e[c]);
        end
      end
    end
  endtask

  // slot handshake: two elements offered, taken in order
  logic go = 0;
  int   n_acq = 0;
  always @(posedge clk) if (!rst && in_acq) n_acq <= n_acq + 1;
  always_comb begin
    in_can   = go && (n_acq < 2);
    out_can  = go && (n_acq < 2);
    in_slot  = (n_acq == 0) ? slot_t'(1) : slot_t'(2);
    out_slot = (n_acq == 0) ? slot_t'(0) : slot_t'(1);
  end

  initial begin
    rst = 1; in_slot = 1; out_can = 0; out_slot = 0;
    for (int a = 0; a < NX2; a++) dxtm[a] = rnd(-2, 2);
    foreach (dxt[a]) dxt[a] = $realtobits(dxtm[a]);
    for (int s = 0; s < 3; s++) for (int p = 0; p < NX3; p++) begin
      u[s][p] = rnd(-1, 1); ub[s][p] = $realtobits(u[s][p]);
      for (int m = 0; m < 6; m++) begin
        g[s][m][p] = rnd(-1, 1); gb[s][m][p] = $realtobits(g[s][m][p]);
      end
      mr[s][p] = '0; ms[s][p] = '0; mt[s][p] = '0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    // element A: input slot 1 -> output slot 0; element B: slot 2 -> slot 1
    go = 1;
    repeat (2 * NG + LAT + 10) @(negedge clk);
    check_elem(1, 0);
    check_elem(2, 1);
    checks += 3;
    $display("first write %0d cycles after first issue; %0d writes over %0d cycles; %0d commits",
             first_write - first_issue, n_writes, last_write - first_write + 1, n_commit);
    if (first_write - first_issue != LAT) begin failures++; $display("latency wrong"); end
    if (n_writes != 2*NG || last_write - first_write + 1 != 2*NG) begin failures++; $display("rate wrong"); end
    if (n_commit != 2) begin failures++; $display("commit count wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
