// Top level: the hybrid systolic / shared-L1 cluster. NumGroups groups of
// TilesPerGroup tiles, each tile with CoresPerTile core complexes and
// BanksPerTile Xqueue-extended L1 banks of BankRows 32-bit words; by default
// 4 x 16 tiles, 256 cores, 1024 banks, 1 MiB, 1024 hardware queues of four
// entries and four QLRs per core, as in the paper.
//
// The cores themselves (RISC-V Snitch with its DSP unit and instruction
// fetch) are not part of this RTL: each one connects through core_i[k] /
// core_o[k] (types in mempool_pkg), which carry its LSU port, the operand
// fields of the instruction at issue, its register-file write-back and the
// QLR stall. Core k sits in tile k / CoresPerTile.
//
// Remote traffic crosses one cluster-level interconnect: a request crossbar
// from every core's remote port to every tile's ingress port and an answer
// crossbar from every tile's egress port to every core. Together with the
// register stages inside the tiles a remote access takes five cycles without
// contention. The paper describes the interconnect only as hierarchical and
// crossbar-based with that latency bound; the flat crossbar used here, which
// gives every remote bank the same latency, is this design's own choice.
module mempool_cluster
  import mempool_pkg::*;
#(
  parameter int unsigned NumGroups     = 4,
  parameter int unsigned TilesPerGroup = 16,
  parameter int unsigned CoresPerTile  = 4,
  parameter int unsigned BanksPerTile  = 16,
  parameter int unsigned BankRows      = 256,
  parameter int unsigned QueueBase     = 0,
  parameter int unsigned QlrDepth      = 4,
  localparam int unsigned NumTiles     = NumGroups * TilesPerGroup,
  localparam int unsigned NumCores     = NumTiles * CoresPerTile,
  localparam int unsigned NumBanks     = NumTiles * BanksPerTile,
  localparam int unsigned TileW        = (NumTiles > 1) ? $clog2(NumTiles) : 1,
  localparam int unsigned CoreSelW     = (NumCores > 1) ? $clog2(NumCores) : 1,
  localparam int unsigned BankW        = $clog2(BanksPerTile)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  core_out_t core_i [NumCores],
  output core_in_t  core_o [NumCores],
  // observation
  output logic [NumQlr-1:0] qlr_stall_o [NumCores],
  output logic      q_empty_o [NumBanks],
  output logic      q_full_o  [NumBanks]
);
  if (NumCores > (1 << CoreIdWidth)) begin : g_check
    $error("mempool_cluster: more cores than core ids");
  end

  logic     rq_valid [NumCores];
  logic     rq_ready [NumCores];
  mem_req_t rq       [NumCores];
  logic [TileW-1:0] rq_sel [NumCores];
  logic     ti_valid [NumTiles];
  logic     ti_ready [NumTiles];
  mem_req_t ti_req   [NumTiles];

  logic     te_valid [NumTiles];
  logic     te_ready [NumTiles];
  mem_rsp_t te_rsp   [NumTiles];
  logic [CoreSelW-1:0] te_sel [NumTiles];
  logic     ci_valid [NumCores];
  logic     ci_ready [NumCores];
  mem_rsp_t ci_rsp   [NumCores];

  for (genvar t = 0; t < NumTiles; t++) begin : g_tile
    core_out_t tc_i [CoresPerTile];
    core_in_t  tc_o [CoresPerTile];
    logic      t_rq_valid [CoresPerTile];
    logic      t_rq_ready [CoresPerTile];
    mem_req_t  t_rq       [CoresPerTile];
    logic      t_ci_valid [CoresPerTile];
    logic      t_ci_ready [CoresPerTile];
    mem_rsp_t  t_ci       [CoresPerTile];
    logic [NumQlr-1:0] t_stall [CoresPerTile];
    logic      t_empty [BanksPerTile];
    logic      t_full  [BanksPerTile];

    for (genvar c = 0; c < CoresPerTile; c++) begin : g_core
      localparam int unsigned K = t * CoresPerTile + c;
      assign tc_i[c]        = core_i[K];
      assign core_o[K]      = tc_o[c];
      assign rq_valid[K]    = t_rq_valid[c];
      assign t_rq_ready[c]  = rq_ready[K];
      assign rq[K]          = t_rq[c];
      assign rq_sel[K]      = TileW'(t_rq[c].addr >> (2 + BankW));
      assign t_ci_valid[c]  = ci_valid[K];
      assign ci_ready[K]    = t_ci_ready[c];
      assign t_ci[c]        = ci_rsp[K];
      assign qlr_stall_o[K] = t_stall[c];
    end
    for (genvar b = 0; b < BanksPerTile; b++) begin : g_bk
      assign q_empty_o[t * BanksPerTile + b] = t_empty[b];
      assign q_full_o[t * BanksPerTile + b]  = t_full[b];
    end

    mempool_tile #(
      .NumCores(CoresPerTile), .NumBanks(BanksPerTile), .NumTiles(NumTiles),
      .BankRows(BankRows), .QueueBase(QueueBase), .QlrDepth(QlrDepth)
    ) i_tile (
      .clk_i, .rst_ni,
      .tile_id_i(TileW'(t)),
      .core_i(tc_i), .core_o(tc_o),
      .rmt_req_valid_o(t_rq_valid), .rmt_req_ready_i(t_rq_ready), .rmt_req_o(t_rq),
      .rmt_in_valid_i(ti_valid[t]), .rmt_in_ready_o(ti_ready[t]), .rmt_in_req_i(ti_req[t]),
      .rmt_rsp_valid_o(te_valid[t]), .rmt_rsp_ready_i(te_ready[t]), .rmt_rsp_o(te_rsp[t]),
      .rmt_rsp_in_valid_i(t_ci_valid), .rmt_rsp_in_ready_o(t_ci_ready), .rmt_rsp_in_i(t_ci),
      .qlr_stall_o(t_stall), .q_empty_o(t_empty), .q_full_o(t_full)
    );
    assign te_sel[t] = CoreSelW'(te_rsp[t].meta.core);
  end

  stream_xbar #(.NumIn(NumCores), .NumOut(NumTiles), .T(mem_req_t)) i_rmt_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(rq_valid), .in_ready_o(rq_ready), .in_data_i(rq), .in_sel_i(rq_sel),
    .out_valid_o(ti_valid), .out_ready_i(ti_ready), .out_data_o(ti_req)
  );

  stream_xbar #(.NumIn(NumTiles), .NumOut(NumCores), .T(mem_rsp_t)) i_rmt_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(te_valid), .in_ready_o(te_ready), .in_data_i(te_rsp), .in_sel_i(te_sel),
    .out_valid_o(ci_valid), .out_ready_i(ci_ready), .out_data_o(ci_rsp)
  );

endmodule
