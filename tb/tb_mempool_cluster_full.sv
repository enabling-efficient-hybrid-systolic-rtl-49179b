// Full-size end-to-end test: the cluster with all its default parameters
// (4 groups x 16 tiles, 256 cores, 1024 banks). The cores form eight
// systolic chains of 32 cores (the last one 31 long, its final core being
// the latency probe), each with a mover, compute PEs with incoming/outgoing
// QLRs, one in-out forwarding PE, one PE reusing operands twice and a slow
// sink; the values stream through every chain and the same checks and
// mechanism counts as in the reduced test are applied.
module tb_mempool_cluster_full;
  import mempool_pkg::*;
  localparam int NG = 4, TPG = 16, CPT = 4, BPT = 16;
  localparam int NT = NG * TPG, NC = NT * CPT, NB = NT * BPT;
  localparam int RowLsb = 2 + $clog2(NB);
  localparam int L = 32, N = 32;
  logic clk = 0, rst_n = 0;
  core_out_t co [NC];
  core_in_t  ci [NC];
  logic [NumQlr-1:0] qstall [NC];
  logic qe [NB], qf [NB];
  mempool_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .core_i(co), .core_o(ci),
    .qlr_stall_o(qstall), .q_empty_o(qe), .q_full_o(qf));
  `include "cluster_test_body.svh"
endmodule
