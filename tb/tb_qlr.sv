// Self-checking test of one qlr, with this testbench as both the core
// (register reads and writes at issue, register file) and the memory (pops
// answered from a numbered source sequence after 1-4 cycles, pushes
// collected). Checks: incoming mode with reuse 2 delivers every popped value
// exactly twice and in order, reads stall until data is there (RAW);
// outgoing mode pushes every written value in order to the outgoing address
// and stalls writers when its FIFO is full (WAW); in-out mode forwards every
// popped value in order while also serving it to the register.
module tb_qlr;
  import mempool_pkg::*;
  logic clk = 0, rst_n = 0;
  qlr_mode_e mode;
  addr_t in_addr, out_addr;
  logic [7:0] reuse;
  logic reads, writes, issue, stall, wb_valid, rf_valid, rf_ready, req_valid, req_ready, rsp_valid, busy;
  data_t wb_data, rf_data, req_wdata, rsp_data;
  mem_op_e req_op;
  addr_t req_addr;
  tag_t req_tag, rsp_tag;
  int checks = 0, failures = 0;
  int raw_stalls = 0, waw_stalls = 0;

  qlr #(.Depth(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mode_i(mode), .in_addr_i(in_addr), .out_addr_i(out_addr),
    .reuse_i(reuse), .reads_i(reads), .writes_i(writes), .issue_i(issue), .stall_o(stall),
    .wb_valid_i(wb_valid), .wb_data_i(wb_data), .rf_valid_o(rf_valid), .rf_ready_i(rf_ready),
    .rf_data_o(rf_data), .req_valid_o(req_valid), .req_ready_i(req_ready), .req_op_o(req_op),
    .req_addr_o(req_addr), .req_wdata_o(req_wdata), .req_tag_o(req_tag), .rsp_valid_i(rsp_valid),
    .rsp_data_i(rsp_data), .rsp_tag_i(rsp_tag), .busy_o(busy));
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- memory model ----------------
  int pop_count = 0;
  data_t pushed [$];
  addr_t pushed_addr [$];
  typedef struct { int due; data_t d; logic pop; } pend_t;
  pend_t pend [$];
  int cyc = 0;
  logic mem_block = 0;
  function automatic data_t src_val(int k); return data_t'(k * 3 + 7); endfunction

  assign req_ready = !mem_block && (pend.size() < 8);
  always @(posedge clk) begin
    cyc++;
    rsp_valid <= 0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1; rsp_data <= pend[0].d; rsp_tag <= pend[0].pop ? 8'h01 : 8'h00;
      void'(pend.pop_front());
    end
    if (rst_n && req_valid && req_ready) begin
      pend_t p;
      p.due = (pend.size() > 0 ? pend[$].due : cyc) + $urandom_range(1, 4);
      if (req_op == OP_QPOP) begin
        if (req_addr != in_addr) begin failures++; $display("pop to wrong address"); end
        p.d = src_val(pop_count); p.pop = 1; pop_count++;
      end else begin
        p.d = '0; p.pop = 0; pushed.push_back(req_wdata); pushed_addr.push_back(req_addr);
      end
      pend.push_back(p);
    end
  end

  // ---------------- register file model ----------------
  data_t t0;
  always @(posedge clk) if (rf_valid && rf_ready) t0 <= rf_data;
  always @(negedge clk) rf_ready = ($urandom_range(3) != 0);

  // issue one instruction; returns the value of the register at issue
  task automatic exec(input logic rd_reg, input logic wr_reg, input data_t wval, output data_t rval);
    @(negedge clk);
    reads = rd_reg; writes = wr_reg; #1;
    while (stall) begin
      if (rd_reg) raw_stalls++;
      if (wr_reg) waw_stalls++;
      @(negedge clk); #1;
    end
    issue = 1; wb_valid = wr_reg; wb_data = wval;
    @(posedge clk);
    rval = t0;
    #1 issue = 0; wb_valid = 0; reads = 0; writes = 0;
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t v;
  initial begin
    mode = QLR_OFF; in_addr = 32'h0000_0104; out_addr = 32'h0000_0208; reuse = 2;
    reads = 0; writes = 0; issue = 0; wb_valid = 0; wb_data = 0; rsp_valid = 0; rsp_data = 0; rsp_tag = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);
    chk(!req_valid, "idle when off");
    // ---- incoming, reuse 2 ----
    mode = QLR_IN;
    for (int k = 0; k < 20; k++)
      for (int r = 0; r < 2; r++) begin
        exec(1, 0, 0, v);
        chk(v == src_val(k), $sformatf("incoming value %0d use %0d: %0d", k, r, v));
      end
    chk(raw_stalls > 0, "RAW stall seen at start-up");
    // ---- outgoing ----
    mode = QLR_OFF;
    repeat (60) @(posedge clk); @(posedge clk);
    pushed.delete(); pushed_addr.delete();
    mode = QLR_OUT;
    mem_block = 1;
    fork
      begin repeat (40) @(posedge clk); mem_block = 0; end
      for (int k = 0; k < 16; k++) exec(0, 1, data_t'(1000 + k), v);
    join
    repeat (30) @(posedge clk);
    chk(waw_stalls > 0, "WAW stall when the outgoing FIFO is full");
    chk(pushed.size() == 16, $sformatf("all writes pushed (%0d)", pushed.size()));
    for (int k = 0; k < pushed.size(); k++) begin
      chk(pushed[k] == data_t'(1000 + k), "push order and data");
      chk(pushed_addr[k] == out_addr, "push address");
    end
    // ---- in-out (forwarding) ----
    mode = QLR_OFF; repeat (60) @(posedge clk);
    pushed.delete(); pushed_addr.delete();
    pop_count = 0; reuse = 1;
    mode = QLR_INOUT;
    for (int k = 0; k < 12; k++) begin
      exec(1, 0, 0, v);
      chk(v == src_val(k), "in-out register value");
    end
    repeat (40) @(posedge clk);
    chk(pushed.size() >= 12, "in-out forwarded every popped value");
    for (int k = 0; k < pushed.size(); k++) chk(pushed[k] == src_val(k), "forward order");
    $display("raw_stalls=%0d waw_stalls=%0d", raw_stalls, waw_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
