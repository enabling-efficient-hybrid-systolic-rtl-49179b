// Xqueue-extended memory controller of one L1 bank.
//
// Accepts one request per cycle from the tile crossbar and answers each one
// exactly once, one cycle after it reaches the bank at the earliest:
//  * load / store: one bank access; a store is answered with an empty ack.
//  * AMO: read in the first cycle, answered with the old word, and the AMO
//    ALU result written back in the second cycle (no request is taken then).
//  * q.push / q.pop: the queue manager turns them into a write at the tail or
//    a read at the head of the bank's queue, which occupies QueueDepth rows
//    starting at QueueBase. The row bits of a queue request's address are
//    ignored: one queue per bank, so the bank index selects the queue.
//    A pop on an empty queue is parked and answered after the next push; a
//    push on a full queue writes its operand into the spare slot and is
//    answered when a pop frees a slot. Meanwhile all other requests proceed.
// Priority each cycle: AMO write-back, serving a parked pop, the late answer
// of a parked push, then a new request. Anything that produces an answer
// needs the single response register to be free or draining.
// Structure (queue manager beside the AMO ALU, muxes on address, write data
// and read data) follows the paper's controller figure; answering stores and
// the fixed queue location are this design's own choices.
module mem_ctrl
  import mempool_pkg::*;
#(
  parameter int unsigned Rows       = 256,
  parameter int unsigned RowLsb     = 12,   // address bit where the row starts
  parameter int unsigned QueueBase  = 0,    // first row of the queue
  parameter int unsigned QDepth     = QueueDepth,
  localparam int unsigned RowW      = $clog2(Rows)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           req_valid_i,
  output logic           req_ready_o,
  input  mem_req_t       req_i,
  output logic           rsp_valid_o,
  input  logic           rsp_ready_i,
  output mem_rsp_t       rsp_o,
  // towards the SRAM bank
  output logic           sram_req_o,
  output logic           sram_we_o,
  output logic [RowW-1:0] sram_addr_o,
  output data_t          sram_wdata_o,
  output logic [3:0]     sram_be_o,
  input  data_t          sram_rdata_i,
  // status, for observation
  output logic           q_empty_o,
  output logic           q_full_o
);
  localparam int unsigned PtrW = $clog2(QDepth);

  // Response register
  logic      rsp_valid_q, rsp_from_sram_q;
  mem_meta_t rsp_meta_q;
  logic      rsp_free;
  assign rsp_free    = !rsp_valid_q || rsp_ready_i;
  assign rsp_valid_o = rsp_valid_q;
  assign rsp_o.rdata = rsp_from_sram_q ? sram_rdata_i : '0;
  assign rsp_o.meta  = rsp_meta_q;

  // AMO second phase
  logic            amo_q;
  mem_op_e         amo_op_q;
  data_t           amo_operand_q;
  logic [RowW-1:0] amo_row_q;
  data_t           amo_result;

  amo_alu i_amo_alu (
    .op_i(amo_op_q), .operand_i(amo_operand_q), .old_i(sram_rdata_i), .result_o(amo_result)
  );

  // Queue manager
  logic is_queue, is_push;
  logic qm_accept, qm_respond, qm_pop_due, qm_push_ack_due;
  logic [PtrW-1:0] qm_ptr, qm_head;
  mem_meta_t qm_pop_meta, qm_push_meta;
  logic req_fire, pop_srv, push_ack, can_new;

  assign is_queue = req_i.op inside {OP_QPUSH, OP_QPOP};
  assign is_push  = (req_i.op == OP_QPUSH);

  queue_manager #(.Depth(QDepth), .meta_t(mem_meta_t)) i_qm (
    .clk_i, .rst_ni,
    .req_valid_i   (req_valid_i && is_queue),
    .req_push_i    (is_push),
    .req_meta_i    (req_i.meta),
    .accept_o      (qm_accept),
    .respond_o     (qm_respond),
    .ptr_o         (qm_ptr),
    .req_fire_i    (req_fire && is_queue),
    .pop_due_o     (qm_pop_due),
    .pop_meta_o    (qm_pop_meta),
    .ptr_head_o    (qm_head),
    .pop_srv_i     (pop_srv),
    .push_ack_due_o(qm_push_ack_due),
    .push_meta_o   (qm_push_meta),
    .push_ack_i    (push_ack),
    .empty_o       (q_empty_o),
    .full_o        (q_full_o)
  );

  assign pop_srv     = !amo_q && qm_pop_due && rsp_free;
  assign push_ack    = !amo_q && !qm_pop_due && qm_push_ack_due && rsp_free;
  assign can_new     = !amo_q && !qm_pop_due && !qm_push_ack_due && rsp_free;
  assign req_ready_o = can_new && (!is_queue || qm_accept);
  assign req_fire    = req_valid_i && req_ready_o;

  logic [RowW-1:0] req_row, q_row, head_row;
  assign req_row  = req_i.addr[RowLsb +: RowW];
  assign q_row    = RowW'(QueueBase) + RowW'(qm_ptr);
  assign head_row = RowW'(QueueBase) + RowW'(qm_head);

  // SRAM port mux
  always_comb begin
    sram_req_o   = 1'b0;
    sram_we_o    = 1'b0;
    sram_addr_o  = req_row;
    sram_wdata_o = req_i.wdata;
    sram_be_o    = 4'hF;
    if (amo_q) begin
      sram_req_o   = 1'b1;
      sram_we_o    = 1'b1;
      sram_addr_o  = amo_row_q;
      sram_wdata_o = amo_result;
    end else if (pop_srv) begin
      sram_req_o  = 1'b1;
      sram_addr_o = head_row;
    end else if (req_fire) begin
      unique case (req_i.op)
        OP_LOAD:  sram_req_o = 1'b1;
        OP_STORE: begin sram_req_o = 1'b1; sram_we_o = 1'b1; sram_be_o = req_i.be; end
        OP_QPUSH: begin sram_req_o = 1'b1; sram_we_o = 1'b1; sram_addr_o = q_row; end
        OP_QPOP:  begin sram_req_o = qm_respond; sram_addr_o = q_row; end
        default:  sram_req_o = 1'b1;  // AMO read phase
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_valid_q <= 1'b0; rsp_from_sram_q <= 1'b0; rsp_meta_q <= '0;
      amo_q <= 1'b0; amo_op_q <= OP_AMO_SWAP; amo_operand_q <= '0; amo_row_q <= '0;
    end else begin
      if (rsp_valid_q && rsp_ready_i) rsp_valid_q <= 1'b0;
      amo_q <= 1'b0;
      if (pop_srv) begin
        rsp_valid_q <= 1'b1; rsp_from_sram_q <= 1'b1; rsp_meta_q <= qm_pop_meta;
      end else if (push_ack) begin
        rsp_valid_q <= 1'b1; rsp_from_sram_q <= 1'b0; rsp_meta_q <= qm_push_meta;
      end else if (req_fire) begin
        if (!is_queue || qm_respond) begin
          rsp_valid_q     <= 1'b1;
          rsp_meta_q      <= req_i.meta;
          rsp_from_sram_q <= !(req_i.op inside {OP_STORE, OP_QPUSH});
        end
        if (is_amo(req_i.op)) begin
          amo_q <= 1'b1; amo_op_q <= req_i.op; amo_operand_q <= req_i.wdata; amo_row_q <= req_row;
        end
      end
    end
  end

  a_rsp_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               rsp_valid_o && !rsp_ready_i |=> rsp_valid_o && $stable(rsp_o.meta));
endmodule
