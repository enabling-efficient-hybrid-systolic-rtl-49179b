// Body shared by the cluster testbenches; the including module defines
// NG, TPG, CPT, BPT, NT, NC, NB, RowLsb, L (chain length) and N (values).
// It also declares clk, rst_n, co, ci, qstall, qe, qf and instantiates the
// cluster as dut before including this file.
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // chain layout
  localparam int Probe = NC - 1;
  function automatic int chain_of(int k); return k / L; endfunction
  function automatic int last_of(int c);
    return (c * L + L - 1 < NC - 2) ? c * L + L - 1 : NC - 2;
  endfunction
  function automatic int role_of(int k);
    int c = chain_of(k), o = k - chain_of(k) * L;
    if (k == Probe) return 5;
    if (last_of(c) - c * L < 2) return 0;
    if (o == 0) return 1;
    if (k == last_of(c)) return 4;
    return (o == 2) ? 3 : 2;
  endfunction
  // compute PEs before core k in its chain (each adds 1)
  function automatic int off_of(int k);
    int c = chain_of(k), n = 0;
    for (int j = c * L + 1; j < k; j++) if (role_of(j) == 2) n++;
    return n;
  endfunction
  function automatic addr_t qaddr(int k); return addr_t'(16 * k); endfunction
  localparam addr_t DoneAddr = addr_t'((2 << RowLsb) + 12);
  localparam int NumChains = (NC - 2) / L + 1;

  logic go = 0;
  logic done [NC];
  int pc [NC], pf [NC], amo [NC], ll [NC], lr [NC], ru [NC];

  for (genvar k = 0; k < NC; k++) begin : g_pe
    pe_model #(
      .Role(role_of(k)), .N(N), .InQ(qaddr(k)), .OutQ(qaddr(k + 1)),
      .Reuse((k % L == 3) ? 2 : 1), .Add(1), .InOff(off_of(k)), .Slow(4),
      .ResAddr(addr_t'((1 << RowLsb) + 4 * (4 * k + 1))), .DoneAddr(DoneAddr),
      .LocalAddr(addr_t'((3 << RowLsb) + 4 * (4 * k + 1))), .RemoteAddr(addr_t'((3 << RowLsb) + 8))
    ) i_pe (
      .clk_i(clk), .rst_ni(rst_n), .go_i(go), .cin(ci[k]), .cout(co[k]), .done_o(done[k]),
      .checks_o(pc[k]), .failures_o(pf[k]), .amo_old_o(amo[k]), .lat_local_o(ll[k]),
      .lat_remote_o(lr[k]), .reuse_reads_o(ru[k]));
  end

  // mechanism counters
  int raw = 0, waw = 0, parked_pop = 0, parked_push = 0, remote = 0, fwd = 0;
  logic pp [NB], ph [NB];
  logic fw [NC];
  for (genvar t = 0; t < NT; t++) begin : g_obs
    for (genvar b = 0; b < BPT; b++) begin : g_b
      assign pp[t * BPT + b] = dut.g_tile[t].i_tile.g_bank[b].i_mem_ctrl.i_qm.pend_pop_q;
      assign ph[t * BPT + b] = dut.g_tile[t].i_tile.g_bank[b].i_mem_ctrl.i_qm.pend_push_q;
    end
    for (genvar c = 0; c < CPT; c++) begin : g_c
      assign fw[t * CPT + c] = dut.g_tile[t].i_tile.g_cc[c].i_qlr_unit.g_qlr[0].i_qlr.out_pop;
    end
  end
  always @(posedge clk) begin
    for (int k = 0; k < NC; k++) begin
      if (qstall[k][0]) raw++;
      if (qstall[k][1]) waw++;
      if (fw[k]) fwd++;
    end
    for (int b = 0; b < NB; b++) begin
      if (pp[b]) parked_pop++;
      if (ph[b]) parked_push++;
    end
    for (int t = 0; t < NT; t++) if (dut.ti_valid[t] && dut.ti_ready[t]) remote++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int nsinks, seen_mask, cycles;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done[Probe]);
    repeat (60) @(posedge clk);   // QLR configuration
    go = 1;
    cycles = 0;
    for (int k = 0; k < NC; k++) while (!done[k]) begin @(posedge clk); cycles++; end
    repeat (5) @(posedge clk);
    for (int k = 0; k < NC; k++) begin checks += pc[k]; failures += pf[k]; end
    need(ll[Probe] == 1, $sformatf("local load answered in 1 cycle (%0d)", ll[Probe]));
    need(lr[Probe] == 5, $sformatf("remote load answered in 5 cycles (%0d)", lr[Probe]));
    nsinks = 0; seen_mask = 0;
    for (int k = 0; k < NC; k++) if (role_of(k) == 4) begin
      nsinks++;
      need(pc[k] == N + 1, "sink saw every value");
      if (amo[k] >= 0 && amo[k] < 32) seen_mask |= 1 << amo[k];
    end
    need(seen_mask == (1 << nsinks) - 1, "AMO completion counter handed out 0..sinks-1");
    need(raw > 0, "RAW stalls happened");
    need(waw > 0, "WAW stalls happened");
    need(parked_pop > 0, "pops parked on empty queues");
    need(parked_push > 0, "pushes parked on full queues");
    need(remote > 0, "remote requests");
    need(fwd > 0, "in-out forwarding");
    begin
      int r = 0;
      for (int k = 0; k < NC; k++) r += ru[k];
      need(r > 0, "operand reuse");
    end
    $display("chains=%0d sinks=%0d cycles=%0d raw=%0d waw=%0d parked_pop=%0d parked_push=%0d remote=%0d fwd=%0d",
             NumChains, nsinks, cycles, raw, waw, parked_pop, parked_push, remote, fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
