// tb_sem_writer: plays the phase-2 stage, filling w slots with known values
// and committing them through a slot controller, and lets the writer store
// them into a behavioural memory bank. Launch 1 (bank never stalls) checks
// that E elements of 64 words are written in E*64 cycles plus a small start-up
// margin, i.e. one word per cycle without gaps between elements. Launch 2 has
// a bank that stalls 30% of cycles. After each launch every word written is
// compared with the expected address layout (base + e*64 + word) and data,
// the number of writes and the single done pulse are checked.
module tb_sem_writer;
  import sem_pkg::*;

  localparam int N = 7, NX3 = (N+1)**3, WPE = NX3 / 8, E = 6, NS = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;

  logic              start, busy, done;
  logic [31:0]       num_elem;
  logic [ADDR_W-1:0] base_w;
  logic              p_can, p_acq, p_commit, c_can, c_acq, c_rel;
  slot_t             p_slot, c_slot, w_rslot;
  logic [8:0]        w_raddr [8];
  dbl_t              w_rdata [8];
  avm_req_t          req;
  avm_rsp_t          rsp;

  sem_writer #(.N(N)) dut (.clk, .rst, .start, .num_elem, .base_w, .busy, .done,
    .c_can, .c_slot, .c_acq, .c_rel, .w_rslot, .w_raddr, .w_rdata, .req, .rsp);
  sem_pp_ctrl #(.NSLOT(NS)) u_ctrl (.clk, .rst, .p_can, .p_slot, .p_acq, .p_commit,
    .c_can, .c_slot, .c_acq, .c_rel);
  avm_mem_model #(.WORDS(2048)) u_mem (.clk, .req, .rsp);

  dbl_t wb [NS][NX3];
  always_ff @(posedge clk) for (int k = 0; k < 8; k++) w_rdata[k] <= wb[w_rslot][w_raddr[k]];

  function automatic dbl_t val(input int launch, input int e, input int p);
    return {16'(launch), 16'(e), 32'(p * 7 + 1)};
  endfunction

  int checks = 0, failures = 0, n_done = 0;
  always @(posedge clk) if (!rst && done) n_done++;

  // producer: fills and commits E elements
  task automatic produce(input int launch);
    for (int e = 0; e < E; e++) begin
      @(negedge clk);
      while (!p_can) @(negedge clk);
      for (int p = 0; p < NX3; p++) wb[p_slot][p] = val(launch, e, p);
      p_acq = 1;
      @(negedge clk);
      p_acq = 0;
      p_commit = 1;
      @(negedge clk);
      p_commit = 0;
    end
  endtask

  task automatic run(input int launch, input int base, input int max_cycles);
    int t0, nw0;
    nw0 = u_mem.n_writes;
    fork
      produce(launch);
      begin
        // let two elements be ready so the rate is limited by the writer
        repeat (8) @(negedge clk);
        num_elem = E; base_w = base; start = 1;
        t0 = $time / 10;
        @(negedge clk);
        start = 0;
        while (!done) @(negedge clk);
        if (max_cycles > 0) begin
          checks++;
          $display("launch %0d: %0d cycles for %0d words", launch, $time / 10 - t0, E * WPE);
          if ($time / 10 - t0 > max_cycles) begin failures++; $display("writer too slow"); end
        end
      end
    join
    repeat (3) @(negedge clk);
    checks++;
    if (u_mem.n_writes - nw0 != E * WPE) begin failures++; $display("write count %0d", u_mem.n_writes - nw0); end
    for (int e = 0; e < E; e++)
      for (int p = 0; p < NX3; p++) begin
        checks++;
        if (u_mem.mem[base + e*WPE + p/8][64*(p%8) +: 64] !== val(launch, e, p)) begin
          failures++;
          if (failures < 10) $display("launch %0d e=%0d p=%0d wrong", launch, e, p);
        end
      end
  endtask

  initial begin
    rst = 1; start = 0; num_elem = 0; base_w = 0; p_acq = 0; p_commit = 0;
    for (int a = 0; a < 2048; a++) u_mem.mem[a] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    // with no stalls, E*WPE words need E*WPE cycles; allow time for the last
    // elements to be produced by this testbench (3 cycles per element here)
    run(1, 16, E * WPE + 12);
    u_mem.wait_pct = 30;
    run(2, 16 + E * WPE, 0);
    checks++;
    if (n_done != 2) begin failures++; $display("done pulses %0d", n_done); end
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
