// tb_sem_div: phase 2 on two elements back to back at the default size
// (N = 7, T = 4). The testbench models the shur/shus/shut buffers (registered
// reads) holding random values in slots 1 and 2, a random dx, and free w
// slots 0 and 1. It checks every w against a loop-by-loop double-precision
// reference (tolerance scaled by the sum of term magnitudes), that the first
// results are written exactly LAT = 18 cycles after the first issue, that
// 2*128 groups are written in 256 consecutive cycles, and two commits.
module tb_sem_div;
  import sem_pkg::*;

  localparam int N = 7, T = 4, NX = N+1, NX2 = NX*NX, NX3 = NX2*NX, NG = NX3/T;
  localparam int LAT = 1 + MUL_LAT + 5*ADD_LAT;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;

  logic in_can, in_acq, in_rel, out_can, out_acq, out_commit;
  slot_t in_slot, out_slot, in_rslot, w_wslot;
  logic [8:0] ur_raddr [NX], us_raddr [T*NX], ut_raddr [T*NX];
  dbl_t       ur_rdata [NX], us_rdata [T*NX], ut_rdata [T*NX];
  dbl_t       dx [NX2];
  logic       w_we;
  logic [7:0] w_wgrp;
  dbl_t       w_wdata [T];

  sem_div #(.N(N), .T(T)) dut (.*);

  real sr [3][NX3], ss [3][NX3], st [3][NX3];
  dbl_t br [3][NX3], bs [3][NX3], bt [3][NX3];
  real dxm [NX2];

  always_ff @(posedge clk) begin
    for (int k = 0; k < NX; k++) ur_rdata[k] <= br[in_rslot][ur_raddr[k]];
    for (int k = 0; k < T*NX; k++) begin
      us_rdata[k] <= bs[in_rslot][us_raddr[k]];
      ut_rdata[k] <= bt[in_rslot][ut_raddr[k]];
    end
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom() % 1000000) / 1000000.0;
  endfunction

  logic go = 0;
  int   n_acq = 0;
  always @(posedge clk) if (!rst && in_acq) n_acq <= n_acq + 1;
  always_comb begin
    in_can   = go && (n_acq < 2);
    out_can  = go && (n_acq < 2);
    in_slot  = (n_acq == 0) ? slot_t'(1) : slot_t'(2);
    out_slot = (n_acq == 0) ? slot_t'(0) : slot_t'(1);
  end

  int checks = 0, failures = 0;
  longint cyc = 0, first_issue = -1, first_write = -1, last_write = -1;
  int n_writes = 0, n_commit = 0;
  dbl_t wm [3][NX3];

  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (dut.issue && first_issue < 0) first_issue = cyc;
      if (w_we) begin
        if (first_write < 0) first_write = cyc;
        last_write = cyc;
        n_writes++;
        for (int t = 0; t < T; t++) wm[w_wslot][int'(w_wgrp)*T + t] = w_wdata[t];
      end
      if (out_commit) n_commit++;
    end
  end

  task automatic check_elem(input int s_in, input int s_out);
    for (int k = 0; k < NX; k++) for (int j = 0; j < NX; j++) for (int i = 0; i < NX; i++) begin
      int p;
      real w, wb, hw;
      p = i + j*NX + k*NX2;
      w = 0; wb = 0;
      for (int l = 0; l < NX; l++) begin
        w += dxm[l + i*NX] * sr[s_in][l + j*NX + k*NX2];  wb += fabs(dxm[l + i*NX] * sr[s_in][l + j*NX + k*NX2]);
        w += dxm[l + j*NX] * ss[s_in][i + l*NX + k*NX2];  wb += fabs(dxm[l + j*NX] * ss[s_in][i + l*NX + k*NX2]);
        w += dxm[l + k*NX] * st[s_in][i + j*NX + l*NX2];  wb += fabs(dxm[l + k*NX] * st[s_in][i + j*NX + l*NX2]);
      end
      hw = $bitstoreal(wm[s_out][p]);
      checks++;
      if (fabs(hw - w) > 1.0e-13 * wb + 1.0e-300) begin
        failures++;
        if (failures < 10) $display("slot %0d p=%0d got %g exp %g", s_out, p, hw, w);
      end
    end
  endtask

  initial begin
    rst = 1;
    for (int a = 0; a < NX2; a++) begin
      dxm[a] = rnd(-2, 2);
      dx[a]  = $realtobits(dxm[a]);
    end
    for (int s = 0; s < 3; s++) for (int p = 0; p < NX3; p++) begin
      sr[s][p] = rnd(-1, 1); br[s][p] = $realtobits(sr[s][p]);
      ss[s][p] = rnd(-1, 1); bs[s][p] = $realtobits(ss[s][p]);
      st[s][p] = rnd(-1, 1); bt[s][p] = $realtobits(st[s][p]);
      wm[s][p] = '0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
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
