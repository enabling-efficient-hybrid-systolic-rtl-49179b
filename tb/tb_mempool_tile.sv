// End-to-end test of one tile on its own (remote ports idle): a four-PE
// systolic chain inside the tile. Core 0 pushes 24 values into the queue of
// bank 4 with q.push; core 1 (QLR t0 incoming with reuse 2, QLR t1
// outgoing) adds 1 and pushes to bank 8; core 2 forwards them with an in-out
// QLR to bank 12; core 3 pops them with q.pop, slowly, so the chain fills
// up and back-pressure reaches the mover. Checks every value on the way, the
// stored result, the AMO counter, and that stalls and parked queue requests
// did happen.
module tb_mempool_tile;
  import mempool_pkg::*;
  localparam int NC = 4, NB = 16, N = 24;
  logic clk = 0, rst_n = 0;
  core_out_t co [NC];
  core_in_t  ci [NC];
  logic      rq_valid [NC], rq_ready [NC], rr_in_valid [NC], rr_in_ready [NC];
  mem_req_t  rq [NC];
  mem_rsp_t  rr_in [NC];
  logic      ri_ready, re_valid;
  mem_rsp_t  re;
  logic [NumQlr-1:0] qstall [NC];
  logic      qe [NB], qf [NB];
  int checks = 0, failures = 0;

  mempool_tile #(.NumTiles(1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .tile_id_i(1'b0), .core_i(co), .core_o(ci),
    .rmt_req_valid_o(rq_valid), .rmt_req_ready_i(rq_ready), .rmt_req_o(rq),
    .rmt_in_valid_i(1'b0), .rmt_in_ready_o(ri_ready), .rmt_in_req_i('0),
    .rmt_rsp_valid_o(re_valid), .rmt_rsp_ready_i(1'b1), .rmt_rsp_o(re),
    .rmt_rsp_in_valid_i(rr_in_valid), .rmt_rsp_in_ready_o(rr_in_ready), .rmt_rsp_in_i(rr_in),
    .qlr_stall_o(qstall), .q_empty_o(qe), .q_full_o(qf));
  always #5 clk = ~clk;
  for (genvar c = 0; c < NC; c++) begin : g_tie
    assign rq_ready[c] = 1'b1; assign rr_in_valid[c] = 1'b0; assign rr_in[c] = '0;
  end

  function automatic addr_t qaddr(int k); return addr_t'(16 * k); endfunction
  logic done [NC];
  int pc [NC], pf [NC], amo [NC], ll [NC], lr [NC], ru [NC];
  logic go = 0;

  pe_model #(.Role(1), .N(N), .OutQ(qaddr(1))) pe0 (
    .clk_i(clk), .rst_ni(rst_n), .go_i(go), .cin(ci[0]), .cout(co[0]), .done_o(done[0]),
    .checks_o(pc[0]), .failures_o(pf[0]), .amo_old_o(amo[0]), .lat_local_o(ll[0]), .lat_remote_o(lr[0]), .reuse_reads_o(ru[0]));
  pe_model #(.Role(2), .N(N), .InQ(qaddr(1)), .OutQ(qaddr(2)), .Reuse(2), .Add(1)) pe1 (
    .clk_i(clk), .rst_ni(rst_n), .go_i(go), .cin(ci[1]), .cout(co[1]), .done_o(done[1]),
    .checks_o(pc[1]), .failures_o(pf[1]), .amo_old_o(amo[1]), .lat_local_o(ll[1]), .lat_remote_o(lr[1]), .reuse_reads_o(ru[1]));
  pe_model #(.Role(3), .N(N), .InQ(qaddr(2)), .OutQ(qaddr(3)), .InOff(1)) pe2 (
    .clk_i(clk), .rst_ni(rst_n), .go_i(go), .cin(ci[2]), .cout(co[2]), .done_o(done[2]),
    .checks_o(pc[2]), .failures_o(pf[2]), .amo_old_o(amo[2]), .lat_local_o(ll[2]), .lat_remote_o(lr[2]), .reuse_reads_o(ru[2]));
  pe_model #(.Role(4), .N(N), .InQ(qaddr(3)), .InOff(1), .Slow(6),
             .ResAddr(addr_t'((1 << 6) + 4 * 13)), .DoneAddr(addr_t'((2 << 6) + 4 * 13))) pe3 (
    .clk_i(clk), .rst_ni(rst_n), .go_i(go), .cin(ci[3]), .cout(co[3]), .done_o(done[3]),
    .checks_o(pc[3]), .failures_o(pf[3]), .amo_old_o(amo[3]), .lat_local_o(ll[3]), .lat_remote_o(lr[3]), .reuse_reads_o(ru[3]));

  // mechanism counters
  int raw = 0, waw = 0, parked_pop = 0, parked_push = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (qstall[c][0]) raw++;
      if (qstall[c][1]) waw++;
    end
    if (dut.g_bank[4].i_mem_ctrl.i_qm.pend_pop_q || dut.g_bank[8].i_mem_ctrl.i_qm.pend_pop_q ||
        dut.g_bank[12].i_mem_ctrl.i_qm.pend_pop_q) parked_pop++;
    if (dut.g_bank[4].i_mem_ctrl.i_qm.pend_push_q || dut.g_bank[8].i_mem_ctrl.i_qm.pend_push_q ||
        dut.g_bank[12].i_mem_ctrl.i_qm.pend_push_q) parked_push++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (40) @(posedge clk);   // QLR configuration
    go = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    repeat (5) @(posedge clk);
    for (int c = 0; c < NC; c++) begin checks += pc[c]; failures += pf[c]; end
    checks++; if (amo[3] != int'(dut.g_bank[13].i_bank.mem_q[2]) - 1) begin failures++; $display("AMO counter"); end
    checks++; if (pc[3] != N + 1) begin failures++; $display("sink saw %0d values", pc[3] - 1); end
    checks++; if (raw == 0) begin failures++; $display("no RAW stall"); end
    checks++; if (waw == 0) begin failures++; $display("no WAW stall"); end
    checks++; if (parked_pop == 0) begin failures++; $display("no parked pop"); end
    checks++; if (parked_push == 0) begin failures++; $display("no parked push"); end
    checks++; if (ru[1] != N) begin failures++; $display("reuse reads %0d", ru[1]); end
    $display("raw=%0d waw=%0d parked_pop=%0d parked_push=%0d reuse=%0d", raw, waw, parked_pop, parked_push, ru[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
