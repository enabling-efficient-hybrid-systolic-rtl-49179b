// Self-checking test of stream_fifo at depth 4 (the depth used inside a
// queue-linked register). Random pushes, pops and rare flushes are applied
// against a queue model; at every falling edge the test compares the head
// item, the valid/ready flags and the fill count with the model. It also
// checks the one-cycle latency (an item pushed into an empty FIFO is visible
// one cycle later, never in the same cycle) and that a full FIFO refuses input.
module tb_stream_fifo;
  localparam int D = 4;
  logic clk = 0, rst_n = 0, flush = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = '0, out_data;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [31:0] model [$];
  int fulls = 0;
  bit push_seen = 0, pop_seen = 0;

  stream_fifo #(.Depth(D), .T(logic [31:0])) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .in_data_i(in_data), .out_valid_o(out_valid),
    .out_ready_i(out_ready), .out_data_o(out_data), .count_o(count));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // model the edge just passed, with the inputs applied a cycle ago
      if (flush) model.delete();
      else begin
        if (pop_seen) void'(model.pop_front());
        if (push_seen) model.push_back(in_data);
      end
      // compare with the model
      check(out_valid == (model.size() != 0), "out_valid");
      check(in_ready == (model.size() < D), "in_ready");
      check(32'(count) == model.size(), "count");
      if (model.size() != 0) check(out_data == model[0], "head data");
      if (model.size() == D) fulls++;
      // new inputs (phases with more pushes or more pops)
      flush     = ($urandom_range(0, 199) == 0);
      in_valid  = ($urandom_range(0, 9) < ((i / 300) % 2 ? 8 : 3));
      out_ready = ($urandom_range(0, 9) < ((i / 300) % 2 ? 3 : 8));
      in_data   = $urandom;
      push_seen = in_valid && in_ready && !flush;
      pop_seen  = out_valid && out_ready && !flush;
    end
    // latency: empty FIFO, one push, data must not appear in the same cycle
    @(negedge clk);
    flush = 1; in_valid = 0; out_ready = 0;
    @(negedge clk);
    flush = 0; in_valid = 1; in_data = 32'hCAFE_F00D;
    #1 check(!out_valid, "no fall-through");
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == 32'hCAFE_F00D, "visible after one cycle");
    check(fulls > 20, "FIFO was full often enough");
    $display("fulls=%0d", fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
