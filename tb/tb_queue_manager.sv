// Self-checking test of queue_manager (depth 4). Walks the queue through
// empty, full, a parked pop served after a push, and a parked push completed
// by a pop, checking pointers, accept/respond and the due flags against the
// circular-buffer rules worked out by hand; then a random phase compares the
// occupancy with a counter model.
module tb_queue_manager;
  typedef logic [7:0] meta_t;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_push, req_fire, pop_srv, push_ack;
  meta_t req_meta, pop_meta, push_meta;
  logic accept, respond, pop_due, push_ack_due, empty, full;
  logic [1:0] ptr, ptr_head;
  int checks = 0, failures = 0;

  queue_manager #(.Depth(4), .meta_t(meta_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_push_i(req_push),
    .req_meta_i(req_meta), .accept_o(accept), .respond_o(respond), .ptr_o(ptr),
    .req_fire_i(req_fire), .pop_due_o(pop_due), .pop_meta_o(pop_meta), .ptr_head_o(ptr_head),
    .pop_srv_i(pop_srv), .push_ack_due_o(push_ack_due), .push_meta_o(push_meta),
    .push_ack_i(push_ack), .empty_o(empty), .full_o(full));
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // present a request, check the combinational answer, optionally execute it
  task automatic op(input logic push, input meta_t m, input logic exp_accept, input logic exp_respond,
                    input logic [1:0] exp_ptr, input string what);
    @(negedge clk);
    req_valid = 1; req_push = push; req_meta = m; #1;
    chk(accept == exp_accept, {what, ": accept"});
    if (accept) begin
      chk(respond == exp_respond, {what, ": respond"});
      chk(ptr == exp_ptr, {what, ": pointer"});
      req_fire = 1;
    end
    @(posedge clk); #1;
    req_valid = 0; req_fire = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int occ;
  initial begin
    req_valid = 0; req_push = 0; req_fire = 0; pop_srv = 0; push_ack = 0; req_meta = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    #1 chk(empty && !full, "empty after reset");
    // pop on empty: parked, no answer
    op(0, 8'hA1, 1, 0, 2'd0, "pop empty");
    op(0, 8'hA2, 0, 0, 2'd0, "second pop refused");
    // a push is accepted and answered; the parked pop becomes due
    op(1, 8'hB1, 1, 1, 2'd0, "push wakes pop");
    chk(pop_due && pop_meta == 8'hA1 && ptr_head == 2'd0, "pop due after push");
    op(0, 8'hA3, 0, 0, 2'd0, "pop refused while one is due");
    @(negedge clk); pop_srv = 1; @(posedge clk); #1 pop_srv = 0;
    chk(!pop_due && empty, "parked pop served, queue empty");
    // fill: three pushes fit (one slot is kept free)
    op(1, 8'hB2, 1, 1, 2'd1, "push 1");
    op(1, 8'hB3, 1, 1, 2'd2, "push 2");
    op(1, 8'hB4, 1, 1, 2'd3, "push 3");
    chk(full, "full after three");
    // push on full: operand goes to the spare slot (tail), parked
    op(1, 8'hB5, 1, 0, 2'd0, "push on full parked");
    op(1, 8'hB6, 0, 0, 2'd0, "second push refused");
    // a pop frees a slot: answered now, parked push completes
    op(0, 8'hA4, 1, 1, 2'd1, "pop frees slot");
    chk(push_ack_due && push_meta == 8'hB5, "late push answer due");
    chk(full, "still full after pop + parked push");
    @(negedge clk); push_ack = 1; @(posedge clk); #1 push_ack = 0;
    chk(!push_ack_due, "push answer taken");
    // drain three
    op(0, 8'hA5, 1, 1, 2'd2, "pop");
    op(0, 8'hA6, 1, 1, 2'd3, "pop");
    op(0, 8'hA7, 1, 1, 2'd0, "pop");
    chk(empty, "empty after drain");
    // random phase against an occupancy model (no parked requests)
    occ = 0;
    for (int i = 0; i < 400; i++) begin
      logic p;
      p = (occ == 0) ? 1'b1 : (occ == 3) ? 1'b0 : 1'($urandom_range(1));
      @(negedge clk); req_valid = 1; req_push = p; #1;
      chk(accept && respond, "random: accepted and answered");
      req_fire = 1;
      @(posedge clk); #1 req_valid = 0; req_fire = 0;
      occ += p ? 1 : -1;
      chk(empty == (occ == 0) && full == (occ == 3), "random: occupancy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
