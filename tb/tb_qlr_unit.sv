// Self-checking test of qlr_unit. This testbench plays the core and a
// one-cycle memory. Checks: QLR CSRs are written and read back through the
// LSU and never reach memory; core requests go out with source 0, the core
// id and the tag, and their answers come back to the core; a QLR on t1 in
// incoming mode pops from its address (source 2), stalls a reader of x6
// until the value is written into the register file, loses the write port
// to a core write-back in the same cycle; a QLR on t3 (x28) in outgoing mode
// turns a write-back of x28 into a q.push (source 4) of that value.
module tb_qlr_unit;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  core_out_t ci;
  core_in_t  co;
  logic mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [NumQlr-1:0] qstall;
  int checks = 0, failures = 0;

  qlr_unit dut (.clk_i(clk), .rst_ni(rst_n), .core_id_i(8'd37), .core_i(ci), .core_o(co),
                .mem_req_valid_o(mreq_valid), .mem_req_ready_i(mreq_ready), .mem_req_o(mreq),
                .mem_rsp_valid_i(mrsp_valid), .mem_rsp_ready_o(mrsp_ready), .mem_rsp_i(mrsp),
                .qlr_stall_o(qstall));
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one-cycle memory: pops answer 500 + n, others answer 32'h600 + low address bits
  mem_req_t seen [$];
  mem_rsp_t rq [$];
  int npop = 0;
  assign mreq_ready = 1'b1;
  always @(posedge clk) begin
    if (mrsp_valid && mrsp_ready) void'(rq.pop_front());
    if (rst_n && mreq_valid) begin
      mem_rsp_t r;
      seen.push_back(mreq);
      r.meta = mreq.meta;
      r.rdata = (mreq.op == OP_QPOP) ? data_t'(500 + npop) : data_t'(32'h600 + mreq.addr[7:0]);
      if (mreq.op == OP_QPOP) npop++;
      rq.push_back(r);
    end
  end
  always_comb begin
    mrsp_valid = rq.size() > 0;
    mrsp = (rq.size() > 0) ? rq[0] : '0;
  end

  // core answers
  logic  core_got [256];
  data_t core_data [256];
  always @(posedge clk) if (co.rsp_valid) begin core_got[co.rsp_tag] = 1; core_data[co.rsp_tag] = co.rsp_rdata; end

  // register file
  data_t rf [32];
  always @(posedge clk) if (co.rf_we) rf[co.rf_waddr] <= co.rf_wdata;

  task automatic lsu(input mem_op_e op, input addr_t a, input data_t d, input int tag, output data_t r);
    int n = 0;
    @(negedge clk);
    core_got[tag] = 0;
    ci.req_valid = 1; ci.req_op = op; ci.req_addr = a; ci.req_wdata = d; ci.req_be = 4'hF; ci.req_tag = tag_t'(tag);
    @(posedge clk); while (!co.req_ready) @(posedge clk);
    #1 ci.req_valid = 0;
    while (!core_got[tag] && n < 50) begin @(posedge clk); n++; end
    #1 chk(core_got[tag], $sformatf("answer to tag %0d", tag));
    r = core_data[tag];
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t r;
  int nseen;
  initial begin
    ci = '0;
    for (int i = 0; i < 32; i++) rf[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- CSRs ----
    for (int q = 0; q < NumQlr; q++) begin
      lsu(OP_STORE, QlrCsrBase + 16 * q + 0, 32'h1000 + q, 1, r);
      lsu(OP_STORE, QlrCsrBase + 16 * q + 4, 32'h2000 + q, 2, r);
      lsu(OP_STORE, QlrCsrBase + 16 * q + 12, 3 + q, 3, r);
    end
    for (int q = 0; q < NumQlr; q++) begin
      lsu(OP_LOAD, QlrCsrBase + 16 * q + 0, 0, 4, r); chk(r == 32'h1000 + q, "CSR in address");
      lsu(OP_LOAD, QlrCsrBase + 16 * q + 4, 0, 5, r); chk(r == 32'h2000 + q, "CSR out address");
      lsu(OP_LOAD, QlrCsrBase + 16 * q + 12, 0, 6, r); chk(r == 3 + q, "CSR reuse");
      lsu(OP_LOAD, QlrCsrBase + 16 * q + 8, 0, 7, r); chk(r == 0, "CSR mode off");
    end
    chk(seen.size() == 0, "CSR accesses stay inside the core complex");
    // ---- core request ----
    lsu(OP_LOAD, 32'h0000_0044, 0, 9, r);
    chk(seen.size() == 1 && seen[0].meta.src == 0 && seen[0].meta.core == 8'd37 && seen[0].meta.tag == 9,
        "core request meta");
    chk(r == 32'h644, "core answer data");
    // ---- incoming QLR on t1 (x6) ----
    lsu(OP_STORE, QlrCsrBase + 16 * 1 + 12, 1, 10, r);
    // reader of x6 stalls before the mode is set
    @(negedge clk);
    ci.instr_valid = 1; ci.rs1 = 5'd6; ci.rs1_used = 1; ci.rd = 5'd10; ci.rd_used = 1;
    // set mode IN while a core write-back occupies the register-file port
    ci.wb_valid = 1; ci.wb_rd = 5'd11; ci.wb_data = 32'h55;
    ci.req_valid = 1; ci.req_op = OP_STORE; ci.req_addr = QlrCsrBase + 16 * 1 + 8; ci.req_wdata = QLR_IN; ci.req_tag = 11;
    @(posedge clk); #1 ci.req_valid = 0;
    nseen = seen.size();
    repeat (4) begin
      @(negedge clk); #1;
      chk(co.qlr_stall && qstall == 4'b0010, "reader of t1 stalls while the port is busy");
      chk(co.rf_waddr == 5'd11, "core write-back wins the port");
    end
    chk(seen.size() > nseen && seen[nseen].op == OP_QPOP && seen[nseen].meta.src == 2 &&
        seen[nseen].addr == 32'h1001, "QLR 1 pops its queue");
    ci.wb_valid = 0;
    repeat (2) @(posedge clk);
    #1 chk(rf[6] == 500 && !co.qlr_stall, "popped value in x6, stall released");
    @(negedge clk); ci.issue = 1; @(posedge clk); #1 ci.issue = 0;
    repeat (3) @(posedge clk);
    #1 chk(rf[6] == 501, "next value after the read");
    ci.instr_valid = 0; ci.rs1_used = 0; ci.rd_used = 0;
    // ---- outgoing QLR on t3 (x28) ----
    lsu(OP_STORE, QlrCsrBase + 16 * 3 + 8, QLR_OUT, 12, r);
    nseen = seen.size();
    @(negedge clk);
    ci.instr_valid = 1; ci.rd = 5'd28; ci.rd_used = 1; #1;
    chk(!co.qlr_stall, "writer of t3 not stalled");
    ci.issue = 1; ci.wb_valid = 1; ci.wb_rd = 5'd28; ci.wb_data = 32'hBEEF;
    @(posedge clk); #1 ci.issue = 0; ci.wb_valid = 0; ci.instr_valid = 0; ci.rd_used = 0;
    repeat (4) @(posedge clk);
    begin
      logic found = 0;
      for (int i = nseen; i < seen.size(); i++)
        if (seen[i].op == OP_QPUSH && seen[i].meta.src == 4 && seen[i].addr == 32'h2003 && seen[i].wdata == 32'hBEEF)
          found = 1;
      chk(found, "write of x28 becomes a q.push of its value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
