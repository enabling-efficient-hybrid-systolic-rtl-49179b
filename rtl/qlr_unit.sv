// QLR extension of one core complex: four queue-linked registers tied to
// t0..t3 (x5, x6, x7, x28), their private memory-mapped CSRs, the register
// file write-back mux, the scoreboard override and the sharing of the core's
// single memory port (the LSU) between the core and the QLRs.
//
// Core side (core_out_t in, core_in_t out, see mempool_pkg):
//  * LSU requests to QlrCsrBase + 16*q + {0,4,8,12} read or write QLR q's
//    queue address, forward-queue address, mode and reuse degree. They are
//    answered here, one cycle later, and never leave the core complex.
//  * Other LSU requests, and the QLRs' q.push / q.pop requests, go out on
//    mem_req_* after round-robin arbitration; answers are routed back by the
//    meta.src field (0 core, q+1 QLR q). The core must take an answer in the
//    cycle it is offered; a CSR answer goes first.
//  * The decoded operands of the instruction at issue are compared with the
//    QLR registers; qlr_stall is the OR of the QLRs' hazard stalls and is a
//    function of those fields only (not of issue).
//  * The core's write-back always wins the register-file write port; a QLR
//    writes a popped value in a cycle when the core does not (lowest QLR
//    index first).
// The four interfaces (memory via the LSU, write-back, snooping, scoreboard)
// and the t0..t3 binding follow the paper; CSR layout, arbitration and the
// answer-every-request rule are design choices.
module qlr_unit
  import mempool_pkg::*;
#(
  parameter int unsigned QlrDepth = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  core_id_t  core_id_i,
  input  core_out_t core_i,
  output core_in_t  core_o,
  output logic      mem_req_valid_o,
  input  logic      mem_req_ready_i,
  output mem_req_t  mem_req_o,
  input  logic      mem_rsp_valid_i,
  output logic      mem_rsp_ready_o,
  input  mem_rsp_t  mem_rsp_i,
  output logic [NumQlr-1:0] qlr_stall_o   // per-QLR stall, for observation
);
  // ---------------- CSRs ----------------
  qlr_mode_e  mode_q     [NumQlr];
  addr_t      in_addr_q  [NumQlr];
  addr_t      out_addr_q [NumQlr];
  logic [7:0] reuse_q    [NumQlr];

  logic is_csr;
  assign is_csr = core_i.req_valid && (core_i.req_addr[31:8] == QlrCsrBase[31:8]);
  logic [1:0] csr_q_idx, csr_field;
  assign csr_q_idx = core_i.req_addr[5:4];
  assign csr_field = core_i.req_addr[3:2];

  logic  csr_rsp_valid_q;
  data_t csr_rsp_data_q;
  tag_t  csr_rsp_tag_q;
  logic  csr_fire;
  assign csr_fire = is_csr && !csr_rsp_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int q = 0; q < NumQlr; q++) begin
        mode_q[q] <= QLR_OFF; in_addr_q[q] <= '0; out_addr_q[q] <= '0; reuse_q[q] <= 8'd1;
      end
      csr_rsp_valid_q <= 1'b0; csr_rsp_data_q <= '0; csr_rsp_tag_q <= '0;
    end else begin
      csr_rsp_valid_q <= csr_fire;   // the answer is taken in the cycle it is offered
      if (csr_fire) begin
        csr_rsp_tag_q  <= core_i.req_tag;
        csr_rsp_data_q <= '0;
        if (core_i.req_op == OP_STORE) begin
          unique case (csr_field)
            2'd0: in_addr_q[csr_q_idx]  <= core_i.req_wdata;
            2'd1: out_addr_q[csr_q_idx] <= core_i.req_wdata;
            2'd2: mode_q[csr_q_idx]     <= qlr_mode_e'(core_i.req_wdata[1:0]);
            default: reuse_q[csr_q_idx] <= core_i.req_wdata[7:0];
          endcase
        end else begin
          unique case (csr_field)
            2'd0: csr_rsp_data_q <= in_addr_q[csr_q_idx];
            2'd1: csr_rsp_data_q <= out_addr_q[csr_q_idx];
            2'd2: csr_rsp_data_q <= {30'd0, mode_q[csr_q_idx]};
            default: csr_rsp_data_q <= {24'd0, reuse_q[csr_q_idx]};
          endcase
        end
      end
    end
  end

  // ---------------- QLR instances ----------------
  logic      q_stall   [NumQlr];
  logic      q_rf_valid[NumQlr];
  logic      q_rf_ready[NumQlr];
  data_t     q_rf_data [NumQlr];
  logic      q_req_valid[NumQlr];
  logic      q_req_ready[NumQlr];
  mem_op_e   q_req_op  [NumQlr];
  addr_t     q_req_addr[NumQlr];
  data_t     q_req_wdata[NumQlr];
  tag_t      q_req_tag [NumQlr];
  logic      q_rsp_valid[NumQlr];

  for (genvar q = 0; q < NumQlr; q++) begin : g_qlr
    logic reads, writes, wb;
    assign reads  = core_i.instr_valid &&
                    ((core_i.rs1_used && core_i.rs1 == QlrReg[q]) ||
                     (core_i.rs2_used && core_i.rs2 == QlrReg[q]));
    assign writes = core_i.instr_valid && core_i.rd_used && core_i.rd == QlrReg[q];
    assign wb     = core_i.wb_valid && core_i.wb_rd == QlrReg[q];
    assign q_rsp_valid[q] = mem_rsp_valid_i && (32'(mem_rsp_i.meta.src) == q + 1);

    qlr #(.Depth(QlrDepth)) i_qlr (
      .clk_i, .rst_ni,
      .mode_i(mode_q[q]), .in_addr_i(in_addr_q[q]), .out_addr_i(out_addr_q[q]), .reuse_i(reuse_q[q]),
      .reads_i(reads), .writes_i(writes), .issue_i(core_i.issue), .stall_o(q_stall[q]),
      .wb_valid_i(wb), .wb_data_i(core_i.wb_data),
      .rf_valid_o(q_rf_valid[q]), .rf_ready_i(q_rf_ready[q]), .rf_data_o(q_rf_data[q]),
      .req_valid_o(q_req_valid[q]), .req_ready_i(q_req_ready[q]), .req_op_o(q_req_op[q]),
      .req_addr_o(q_req_addr[q]), .req_wdata_o(q_req_wdata[q]), .req_tag_o(q_req_tag[q]),
      .rsp_valid_i(q_rsp_valid[q]), .rsp_data_i(mem_rsp_i.rdata), .rsp_tag_i(mem_rsp_i.meta.tag),
      .busy_o()
    );
    assign qlr_stall_o[q] = q_stall[q];
  end

  // ---------------- scoreboard override ----------------
  always_comb begin
    core_o.qlr_stall = 1'b0;
    for (int q = 0; q < NumQlr; q++) core_o.qlr_stall |= q_stall[q];
  end

  // ---------------- write-back mux ----------------
  always_comb begin
    logic taken;
    core_o.rf_we    = core_i.wb_valid;
    core_o.rf_waddr = core_i.wb_rd;
    core_o.rf_wdata = core_i.wb_data;
    taken = core_i.wb_valid;
    for (int q = 0; q < NumQlr; q++) begin
      q_rf_ready[q] = !taken && q_rf_valid[q];
      if (!taken && q_rf_valid[q]) begin
        core_o.rf_we    = 1'b1;
        core_o.rf_waddr = QlrReg[q];
        core_o.rf_wdata = q_rf_data[q];
        taken = 1'b1;
      end
    end
  end

  // ---------------- LSU sharing ----------------
  localparam int unsigned NumSrc = NumQlr + 1;
  logic     src_valid [NumSrc];
  logic     src_ready [NumSrc];
  mem_req_t src_req   [NumSrc];
  logic     src_sel   [NumSrc];
  logic     arb_valid [1];
  logic     arb_ready [1];
  mem_req_t arb_req   [1];

  always_comb begin
    src_valid[0]          = core_i.req_valid && !is_csr;
    src_req[0].addr       = core_i.req_addr;
    src_req[0].wdata      = core_i.req_wdata;
    src_req[0].be         = core_i.req_be;
    src_req[0].op         = core_i.req_op;
    src_req[0].meta.core  = core_id_i;
    src_req[0].meta.src   = '0;
    src_req[0].meta.tag   = core_i.req_tag;
    src_sel[0]            = 1'b0;
    for (int q = 0; q < NumQlr; q++) begin
      src_valid[q+1]         = q_req_valid[q];
      src_req[q+1].addr      = q_req_addr[q];
      src_req[q+1].wdata     = q_req_wdata[q];
      src_req[q+1].be        = 4'hF;
      src_req[q+1].op        = q_req_op[q];
      src_req[q+1].meta.core = core_id_i;
      src_req[q+1].meta.src  = SrcWidth'(q + 1);
      src_req[q+1].meta.tag  = q_req_tag[q];
      src_sel[q+1]           = 1'b0;
      q_req_ready[q]         = src_ready[q+1];
    end
  end

  stream_xbar #(.NumIn(NumSrc), .NumOut(1), .T(mem_req_t)) i_lsu_arb (
    .clk_i, .rst_ni,
    .in_valid_i(src_valid), .in_ready_o(src_ready), .in_data_i(src_req), .in_sel_i(src_sel),
    .out_valid_o(arb_valid), .out_ready_i(arb_ready), .out_data_o(arb_req)
  );
  assign mem_req_valid_o = arb_valid[0];
  assign arb_ready[0]    = mem_req_ready_i;
  assign mem_req_o       = arb_req[0];
  assign core_o.req_ready = is_csr ? !csr_rsp_valid_q : src_ready[0];

  // ---------------- answers ----------------
  logic rsp_to_core;
  assign rsp_to_core     = mem_rsp_valid_i && (mem_rsp_i.meta.src == '0);
  assign mem_rsp_ready_o = !(rsp_to_core && csr_rsp_valid_q);
  assign core_o.rsp_valid = csr_rsp_valid_q || rsp_to_core;
  assign core_o.rsp_rdata = csr_rsp_valid_q ? csr_rsp_data_q : mem_rsp_i.rdata;
  assign core_o.rsp_tag   = csr_rsp_valid_q ? csr_rsp_tag_q : mem_rsp_i.meta.tag;

  a_core_issue_ok: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                    core_i.issue |-> core_i.instr_valid && !core_o.qlr_stall);
endmodule
