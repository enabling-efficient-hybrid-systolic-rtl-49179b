// One tile of the cluster: NumCores core complexes (only their QLR units are
// modelled; the cores connect through core_i/core_o), NumBanks L1 banks each
// behind an Xqueue memory controller, and an all-to-all crossbar between them.
//
// A core's memory request (from its LSU or one of its QLRs) goes to the local
// crossbar when its bank lies in this tile and to the remote request port
// otherwise; the remote path has two register stages per core. Requests from
// other tiles enter through one remote ingress port and compete for the
// banks with the local cores. Answers for local cores go straight back;
// answers for remote cores leave through one egress port (one register
// stage); answers from other tiles enter per core through one register stage
// and are merged with the local ones.
// Timing without contention: local bank access answered in 1 cycle; remote
// access answered in 5 cycles (2 request stages, bank, egress and ingress
// stages), matching the paper's "local banks in one cycle and remote banks
// within five cycles". Tile composition (4 cores, 16 banks, crossbar) follows
// the paper; the register-stage placement is this design's own.
module mempool_tile
  import mempool_pkg::*;
#(
  parameter int unsigned NumCores  = 4,
  parameter int unsigned NumBanks  = 16,
  parameter int unsigned NumTiles  = 64,
  parameter int unsigned BankRows  = 256,
  parameter int unsigned QueueBase = 0,
  parameter int unsigned QlrDepth  = 4,
  localparam int unsigned CoreW    = $clog2(NumCores),
  localparam int unsigned BankW    = $clog2(NumBanks),
  localparam int unsigned TileW    = (NumTiles > 1) ? $clog2(NumTiles) : 1,
  localparam int unsigned RowLsb   = 2 + BankW + $clog2(NumTiles),
  localparam int unsigned RowW     = $clog2(BankRows)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [TileW-1:0] tile_id_i,
  // cores
  input  core_out_t       core_i [NumCores],
  output core_in_t        core_o [NumCores],
  // remote requests leaving, one port per core
  output logic            rmt_req_valid_o [NumCores],
  input  logic            rmt_req_ready_i [NumCores],
  output mem_req_t        rmt_req_o       [NumCores],
  // remote requests entering
  input  logic            rmt_in_valid_i,
  output logic            rmt_in_ready_o,
  input  mem_req_t        rmt_in_req_i,
  // answers to remote cores leaving
  output logic            rmt_rsp_valid_o,
  input  logic            rmt_rsp_ready_i,
  output mem_rsp_t        rmt_rsp_o,
  // answers from remote banks entering, one port per core
  input  logic            rmt_rsp_in_valid_i [NumCores],
  output logic            rmt_rsp_in_ready_o [NumCores],
  input  mem_rsp_t        rmt_rsp_in_i       [NumCores],
  // observation
  output logic [NumQlr-1:0] qlr_stall_o [NumCores],
  output logic            q_empty_o [NumBanks],
  output logic            q_full_o  [NumBanks]
);
  function automatic logic [TileW-1:0] tile_of(addr_t a);
    return (NumTiles > 1) ? TileW'(a >> (2 + BankW)) : '0;
  endfunction

  // ---------------- core complexes ----------------
  logic     cc_req_valid [NumCores];
  logic     cc_req_ready [NumCores];
  mem_req_t cc_req       [NumCores];
  logic     cc_rsp_valid [NumCores];
  logic     cc_rsp_ready [NumCores];
  mem_rsp_t cc_rsp       [NumCores];

  // local crossbar inputs: cores 0..NumCores-1, remote ingress NumCores
  logic     lx_valid [NumCores+1];
  logic     lx_ready [NumCores+1];
  mem_req_t lx_req   [NumCores+1];
  logic [BankW-1:0] lx_sel [NumCores+1];

  // answers from the local crossbar: cores 0..NumCores-1, egress NumCores
  logic     lr_valid [NumCores+1];
  logic     lr_ready [NumCores+1];
  mem_rsp_t lr_rsp   [NumCores+1];

  for (genvar c = 0; c < NumCores; c++) begin : g_cc
    qlr_unit #(.QlrDepth(QlrDepth)) i_qlr_unit (
      .clk_i, .rst_ni,
      .core_id_i      (core_id_t'({tile_id_i, CoreW'(c)})),
      .core_i         (core_i[c]),
      .core_o         (core_o[c]),
      .mem_req_valid_o(cc_req_valid[c]),
      .mem_req_ready_i(cc_req_ready[c]),
      .mem_req_o      (cc_req[c]),
      .mem_rsp_valid_i(cc_rsp_valid[c]),
      .mem_rsp_ready_o(cc_rsp_ready[c]),
      .mem_rsp_i      (cc_rsp[c]),
      .qlr_stall_o    (qlr_stall_o[c])
    );

    // local / remote split
    logic     dm_in_valid [1];
    logic     dm_in_ready [1];
    mem_req_t dm_in       [1];
    logic     dm_sel      [1];
    logic     dm_valid [2];
    logic     dm_ready [2];
    mem_req_t dm_out   [2];
    assign dm_in_valid[0] = cc_req_valid[c];
    assign dm_in[0]       = cc_req[c];
    assign dm_sel[0]      = (tile_of(cc_req[c].addr) != tile_id_i);
    assign cc_req_ready[c] = dm_in_ready[0];

    stream_xbar #(.NumIn(1), .NumOut(2), .T(mem_req_t)) i_demux (
      .clk_i, .rst_ni,
      .in_valid_i(dm_in_valid), .in_ready_o(dm_in_ready), .in_data_i(dm_in), .in_sel_i(dm_sel),
      .out_valid_o(dm_valid), .out_ready_i(dm_ready), .out_data_o(dm_out)
    );

    assign lx_valid[c] = dm_valid[0];
    assign lx_req[c]   = dm_out[0];
    assign lx_sel[c]   = dm_out[0].addr[2 +: BankW];
    assign dm_ready[0] = lx_ready[c];

    // remote request path: two register stages
    logic     s1_valid, s1_ready;
    mem_req_t s1;
    stream_fifo #(.Depth(2), .T(mem_req_t)) i_rq0 (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .in_valid_i(dm_valid[1]), .in_ready_o(dm_ready[1]), .in_data_i(dm_out[1]),
      .out_valid_o(s1_valid), .out_ready_i(s1_ready), .out_data_o(s1), .count_o()
    );
    stream_fifo #(.Depth(2), .T(mem_req_t)) i_rq1 (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .in_valid_i(s1_valid), .in_ready_o(s1_ready), .in_data_i(s1),
      .out_valid_o(rmt_req_valid_o[c]), .out_ready_i(rmt_req_ready_i[c]), .out_data_o(rmt_req_o[c]),
      .count_o()
    );

    // remote answers: one register stage, then merge with local answers
    logic     ri_valid, ri_ready;
    mem_rsp_t ri;
    stream_fifo #(.Depth(2), .T(mem_rsp_t)) i_rsp_in (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .in_valid_i(rmt_rsp_in_valid_i[c]), .in_ready_o(rmt_rsp_in_ready_o[c]), .in_data_i(rmt_rsp_in_i[c]),
      .out_valid_o(ri_valid), .out_ready_i(ri_ready), .out_data_o(ri), .count_o()
    );
    logic     mg_valid [2];
    logic     mg_ready [2];
    mem_rsp_t mg_in    [2];
    logic     mg_sel   [2];
    logic     mg_ovalid [1];
    logic     mg_oready [1];
    mem_rsp_t mg_out    [1];
    assign mg_valid[0] = lr_valid[c];
    assign mg_in[0]    = lr_rsp[c];
    assign mg_sel[0]   = 1'b0;
    assign lr_ready[c] = mg_ready[0];
    assign mg_valid[1] = ri_valid;
    assign mg_in[1]    = ri;
    assign mg_sel[1]   = 1'b0;
    assign ri_ready    = mg_ready[1];
    stream_xbar #(.NumIn(2), .NumOut(1), .T(mem_rsp_t)) i_merge (
      .clk_i, .rst_ni,
      .in_valid_i(mg_valid), .in_ready_o(mg_ready), .in_data_i(mg_in), .in_sel_i(mg_sel),
      .out_valid_o(mg_ovalid), .out_ready_i(mg_oready), .out_data_o(mg_out)
    );
    assign cc_rsp_valid[c] = mg_ovalid[0];
    assign cc_rsp[c]       = mg_out[0];
    assign mg_oready[0]    = cc_rsp_ready[c];
  end

  assign lx_valid[NumCores] = rmt_in_valid_i;
  assign lx_req[NumCores]   = rmt_in_req_i;
  assign lx_sel[NumCores]   = rmt_in_req_i.addr[2 +: BankW];
  assign rmt_in_ready_o     = lx_ready[NumCores];

  // ---------------- local crossbar and banks ----------------
  logic     bk_req_valid [NumBanks];
  logic     bk_req_ready [NumBanks];
  mem_req_t bk_req       [NumBanks];
  logic     bk_rsp_valid [NumBanks];
  logic     bk_rsp_ready [NumBanks];
  mem_rsp_t bk_rsp       [NumBanks];
  logic [$clog2(NumCores+1)-1:0] bk_rsp_sel [NumBanks];

  stream_xbar #(.NumIn(NumCores + 1), .NumOut(NumBanks), .T(mem_req_t)) i_req_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(lx_valid), .in_ready_o(lx_ready), .in_data_i(lx_req), .in_sel_i(lx_sel),
    .out_valid_o(bk_req_valid), .out_ready_i(bk_req_ready), .out_data_o(bk_req)
  );

  for (genvar b = 0; b < NumBanks; b++) begin : g_bank
    logic            sram_req, sram_we;
    logic [RowW-1:0] sram_addr;
    data_t           sram_wdata, sram_rdata;
    logic [3:0]      sram_be;

    mem_ctrl #(.Rows(BankRows), .RowLsb(RowLsb), .QueueBase(QueueBase)) i_mem_ctrl (
      .clk_i, .rst_ni,
      .req_valid_i(bk_req_valid[b]), .req_ready_o(bk_req_ready[b]), .req_i(bk_req[b]),
      .rsp_valid_o(bk_rsp_valid[b]), .rsp_ready_i(bk_rsp_ready[b]), .rsp_o(bk_rsp[b]),
      .sram_req_o(sram_req), .sram_we_o(sram_we), .sram_addr_o(sram_addr),
      .sram_wdata_o(sram_wdata), .sram_be_o(sram_be), .sram_rdata_i(sram_rdata),
      .q_empty_o(q_empty_o[b]), .q_full_o(q_full_o[b])
    );

    spm_bank #(.Rows(BankRows)) i_bank (
      .clk_i, .req_i(sram_req), .we_i(sram_we), .addr_i(sram_addr),
      .wdata_i(sram_wdata), .be_i(sram_be), .rdata_o(sram_rdata)
    );

    assign bk_rsp_sel[b] = ((NumTiles == 1) ||
                            (bk_rsp[b].meta.core >> CoreW) == core_id_t'(tile_id_i))
                           ? $bits(bk_rsp_sel[b])'(bk_rsp[b].meta.core[CoreW-1:0])
                           : $bits(bk_rsp_sel[b])'(NumCores);
  end

  stream_xbar #(.NumIn(NumBanks), .NumOut(NumCores + 1), .T(mem_rsp_t)) i_rsp_xbar (
    .clk_i, .rst_ni,
    .in_valid_i(bk_rsp_valid), .in_ready_o(bk_rsp_ready), .in_data_i(bk_rsp), .in_sel_i(bk_rsp_sel),
    .out_valid_o(lr_valid), .out_ready_i(lr_ready), .out_data_o(lr_rsp)
  );

  // answers to remote cores: one register stage
  stream_fifo #(.Depth(2), .T(mem_rsp_t)) i_rsp_out (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .in_valid_i(lr_valid[NumCores]), .in_ready_o(lr_ready[NumCores]), .in_data_i(lr_rsp[NumCores]),
    .out_valid_o(rmt_rsp_valid_o), .out_ready_i(rmt_rsp_ready_i), .out_data_o(rmt_rsp_o), .count_o()
  );
endmodule
