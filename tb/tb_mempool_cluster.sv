// End-to-end test of the cluster at reduced size (2 groups x 2 tiles, 16
// cores, 64 banks). The cores are split into systolic chains of L cores:
// the first core of a chain is a mover (q.push), the last a sink (q.pop,
// slow), the ones between compute PEs with incoming/outgoing QLRs; the third
// core of each chain forwards with an in-out QLR and the fourth reuses each
// operand twice. The queue feeding core k sits in bank 4k, in core k's tile,
// so links across tiles push remotely. The last core first measures the
// answer latency of a local and a remote load, then the chains start.
// Checks every value, the results, the AMO completion counter, the 1 / 5
// cycle latencies, and counts each mechanism: RAW and WAW stalls, parked
// pops and pushes, remote requests, reuse, in-out forwarding.
module tb_mempool_cluster;
  import mempool_pkg::*;
  localparam int NG = 2, TPG = 2, CPT = 4, BPT = 16;
  localparam int NT = NG * TPG, NC = NT * CPT, NB = NT * BPT;
  localparam int RowLsb = 2 + $clog2(NB);
  localparam int L = 8, N = 16;
  logic clk = 0, rst_n = 0;
  core_out_t co [NC];
  core_in_t  ci [NC];
  logic [NumQlr-1:0] qstall [NC];
  logic qe [NB], qf [NB];
  mempool_cluster #(.NumGroups(NG), .TilesPerGroup(TPG)) dut (
    .clk_i(clk), .rst_ni(rst_n), .core_i(co), .core_o(ci),
    .qlr_stall_o(qstall), .q_empty_o(qe), .q_full_o(qf));
  `include "cluster_test_body.svh"
endmodule
