// Self-checking test of stream_xbar (3 inputs, 2 outputs): every input sends
// numbered items to random outputs while outputs are randomly not ready;
// checks that every item arrives once, at the output it named, in order per
// input, and that an uncontended item passes in the same cycle.
module tb_stream_xbar;
  localparam int NI = 3, NO = 2, N = 300;
  typedef logic [15:0] item_t;   // {in[3:0], out[3:0], seq[7:0]}
  logic clk = 0, rst_n = 0;
  logic in_valid [NI], in_ready [NI], out_valid [NO], out_ready [NO];
  item_t in_data [NI], out_data [NO];
  logic in_sel [NI];
  int checks = 0, failures = 0;
  int sent [NI], next_seq [NI][NO], got [NO];

  stream_xbar #(.NumIn(NI), .NumOut(NO), .T(item_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_data_i(in_data), .in_sel_i(in_sel), .out_valid_o(out_valid),
    .out_ready_i(out_ready), .out_data_o(out_data));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources
  for (genvar i = 0; i < NI; i++) begin : g_src
    int seq_to [NO];
    initial begin
      in_valid[i] = 0; in_data[i] = '0; in_sel[i] = 0; sent[i] = 0;
      for (int o = 0; o < NO; o++) seq_to[o] = 0;
      @(posedge rst_n);
      while (sent[i] < N) begin
        @(negedge clk);
        if (!in_valid[i] && ($urandom_range(3) != 0)) begin
          in_sel[i] = 1'($urandom_range(NO - 1));
          in_data[i] = {4'(i), 4'(in_sel[i]), 8'(seq_to[in_sel[i]])};
          seq_to[in_sel[i]]++;
          in_valid[i] = 1;
        end
        @(posedge clk);
        if (in_valid[i] && in_ready[i]) begin
          #1 in_valid[i] = 0; sent[i]++;
        end
      end
    end
  end

  // sinks
  always @(negedge clk) for (int o = 0; o < NO; o++) out_ready[o] = ($urandom_range(3) != 0);
  always @(posedge clk) begin
    for (int o = 0; o < NO; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        automatic int src = int'(out_data[o][15:12]);
        checks++;
        if (int'(out_data[o][11:8]) != o) begin failures++; $display("item at wrong output"); end
        checks++;
        if (int'(out_data[o][7:0]) != next_seq[src][o] % 256) begin
          failures++; $display("order error in %0d out %0d: %0d vs %0d", src, o, out_data[o][7:0], next_seq[src][o]);
        end
        next_seq[src][o]++;
        got[o]++;
      end
    end
  end

  initial begin
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) next_seq[i][o] = 0;
    for (int o = 0; o < NO; o++) got[o] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent[0] == N && sent[1] == N && sent[2] == N);
    repeat (5) @(posedge clk);
    checks++;
    if (got[0] + got[1] != NI * N) begin failures++; $display("lost items: %0d", got[0] + got[1]); end
    // zero-latency pass with a single requester
    @(negedge clk); #2;
    for (int i = 0; i < NI; i++) in_valid[i] = 0;
    out_ready[0] = 1; out_ready[1] = 1;
    in_valid[1] = 1; in_sel[1] = 1; in_data[1] = 16'h1100; #1;
    checks++;
    if (!(out_valid[1] && out_data[1] == 16'h1100 && in_ready[1])) begin failures++; $display("no same-cycle pass"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
