// Self-checking test of mem_ctrl with an spm_bank behind it: loads, byte
// stores, AMOs (old value returned, new value stored) and Xqueue operations,
// including a pop parked on an empty queue while other requests proceed, a
// push parked on a full queue, FIFO order of queue data, one-cycle answer
// latency, and random answer back-pressure. Expected values come from a
// reference memory and a reference queue kept here.
module tb_mem_ctrl;
  import mempool_pkg::*;
  localparam int Rows = 64;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req;
  mem_rsp_t rsp;
  logic sram_req, sram_we;
  logic [5:0] sram_addr;
  data_t sram_wdata, sram_rdata;
  logic [3:0] sram_be;
  logic q_empty, q_full;
  int checks = 0, failures = 0;
  int cycle = 0;

  mem_ctrl #(.Rows(Rows), .RowLsb(2), .QueueBase(60)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp),
    .sram_req_o(sram_req), .sram_we_o(sram_we), .sram_addr_o(sram_addr),
    .sram_wdata_o(sram_wdata), .sram_be_o(sram_be), .sram_rdata_i(sram_rdata),
    .q_empty_o(q_empty), .q_full_o(q_full));
  spm_bank #(.Rows(Rows)) bank (.clk_i(clk), .req_i(sram_req), .we_i(sram_we), .addr_i(sram_addr),
                                .wdata_i(sram_wdata), .be_i(sram_be), .rdata_o(sram_rdata));
  always #5 clk = ~clk;
  always @(negedge clk) cycle++;

  // answers, by tag
  logic  got [256];
  data_t got_data [256];
  int    got_cycle [256];
  int    acc_cycle [256];
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    if (got[rsp.meta.tag]) begin failures++; $display("tag %0d answered twice", rsp.meta.tag); end
    got[rsp.meta.tag] = 1; got_data[rsp.meta.tag] = rsp.rdata; got_cycle[rsp.meta.tag] = cycle;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endtask

  task automatic send(input mem_op_e op, input int row, input data_t d, input logic [3:0] be, input int tag);
    @(negedge clk);
    req_valid = 1; req.op = op; req.addr = addr_t'(row << 2); req.wdata = d; req.be = be;
    req.meta = '0; req.meta.tag = tag_t'(tag); got[tag] = 0;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    acc_cycle[tag] = cycle;
    #1 req_valid = 0;
  endtask

  task automatic wait_tag(input int tag);
    int n = 0;
    while (!got[tag] && n < 100) begin @(posedge clk); n++; end
    #1;
    chk(got[tag], $sformatf("answer for tag %0d", tag));
  endtask

  data_t ref_mem [Rows];
  data_t q_ref [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req = '0; rsp_ready = 1;
    for (int t = 0; t < 256; t++) got[t] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- stores and loads ----
    for (int r = 0; r < 40; r++) begin
      ref_mem[r] = $urandom;
      send(OP_STORE, r, ref_mem[r], 4'hF, 1);
      wait_tag(1);
    end
    for (int i = 0; i < 40; i++) begin
      int r = $urandom_range(39);
      send(OP_LOAD, r, 0, 4'hF, 2);
      wait_tag(2);
      chk(got_data[2] == ref_mem[r], "load data");
      chk(got_cycle[2] == acc_cycle[2] + 1, "load answered after one cycle");
    end
    // byte store
    send(OP_STORE, 5, 32'hAABBCCDD, 4'b0101, 3); wait_tag(3);
    ref_mem[5][7:0] = 8'hDD; ref_mem[5][23:16] = 8'hBB;
    send(OP_LOAD, 5, 0, 4'hF, 4); wait_tag(4);
    chk(got_data[4] == ref_mem[5], "byte-enabled store");
    // ---- AMOs ----
    send(OP_AMO_ADD, 7, 32'd100, 4'hF, 5); wait_tag(5);
    chk(got_data[5] == ref_mem[7], "amoadd returns old value");
    ref_mem[7] = ref_mem[7] + 100;
    send(OP_AMO_MAXU, 8, 32'hFFFF_FFF0, 4'hF, 6); wait_tag(6);
    chk(got_data[6] == ref_mem[8], "amomaxu returns old value");
    ref_mem[8] = (ref_mem[8] > 32'hFFFF_FFF0) ? ref_mem[8] : 32'hFFFF_FFF0;
    send(OP_AMO_SWAP, 9, 32'h1234, 4'hF, 7);
    send(OP_LOAD, 9, 0, 4'hF, 8);   // back to back with the AMO write-back
    wait_tag(7); wait_tag(8);
    chk(got_data[7] == ref_mem[9], "amoswap old value");
    ref_mem[9] = 32'h1234;
    chk(got_data[8] == 32'h1234, "load after amoswap sees new value");
    foreach (ref_mem[r]) if (r == 7 || r == 8) begin
      send(OP_LOAD, r, 0, 4'hF, 9); wait_tag(9);
      chk(got_data[9] == ref_mem[r], "AMO result stored");
    end
    // ---- queue ----
    chk(q_empty, "queue empty after reset");
    send(OP_QPOP, 0, 0, 4'hF, 20);             // parked
    repeat (3) @(posedge clk);
    chk(!got[20], "pop on empty withheld");
    send(OP_LOAD, 3, 0, 4'hF, 21); wait_tag(21);
    chk(got_data[21] == ref_mem[3], "loads proceed while a pop is parked");
    send(OP_QPUSH, 0, 32'hCAFE0001, 4'hF, 22);
    wait_tag(22); wait_tag(20);
    chk(got_data[20] == 32'hCAFE0001, "parked pop gets pushed data");
    chk(got_cycle[20] > got_cycle[22], "pop answered after the push");
    // three pushes fill it
    for (int i = 0; i < 3; i++) begin
      q_ref.push_back(32'hD000_0000 + i);
      send(OP_QPUSH, 0, 32'hD000_0000 + i, 4'hF, 30 + i); wait_tag(30 + i);
    end
    #1 chk(q_full, "queue full after three pushes");
    send(OP_QPUSH, 0, 32'hD000_0003, 4'hF, 33);  // parked in the spare slot
    q_ref.push_back(32'hD000_0003);
    repeat (3) @(posedge clk);
    chk(!got[33], "push on full withheld");
    send(OP_QPOP, 0, 0, 4'hF, 34);
    wait_tag(34); wait_tag(33);
    chk(got_data[34] == q_ref.pop_front(), "pop order");
    chk(got_cycle[33] > got_cycle[34], "parked push answered after the freeing pop");
    for (int i = 0; i < 3; i++) begin
      send(OP_QPOP, 0, 0, 4'hF, 35 + i); wait_tag(35 + i);
      chk(got_data[35 + i] == q_ref.pop_front(), "pop order incl. parked push");
    end
    #1 chk(q_empty, "queue empty again");
    // the queue rows do not disturb ordinary data
    for (int r = 0; r < 40; r += 13) begin
      send(OP_LOAD, r, 0, 4'hF, 40); wait_tag(40);
      chk(got_data[40] == ref_mem[r], "data intact after queue traffic");
    end
    // ---- random stream with answer back-pressure ----
    fork
      begin
        for (int i = 0; i < 300; i++) begin @(negedge clk); rsp_ready = ($urandom_range(2) != 0); end
        @(negedge clk); rsp_ready = 1;
      end
      begin
        for (int i = 0; i < 60; i++) begin
          int r = $urandom_range(39);
          int tg = 100 + (i % 100);
          if (i % 3 == 0) begin
            ref_mem[r] = $urandom;
            send(OP_STORE, r, ref_mem[r], 4'hF, tg); wait_tag(tg);
          end else if (i % 3 == 1) begin
            send(OP_QPUSH, 0, data_t'(i), 4'hF, tg); wait_tag(tg);
            send(OP_QPOP, 0, 0, 4'hF, tg); wait_tag(tg);
            chk(got_data[tg] == data_t'(i), "random queue round trip");
          end else begin
            send(OP_LOAD, r, 0, 4'hF, tg); wait_tag(tg);
            chk(got_data[tg] == ref_mem[r], "random load");
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
