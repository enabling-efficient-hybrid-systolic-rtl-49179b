// Queue-linked register (QLR): makes one architectural register a port of a
// memory-mapped queue, so that the core exchanges systolic data without
// q.push / q.pop instructions.
//
// Modes (mode_i):
//  * QLR_IN: the QLR keeps up to Depth q.pop requests in flight to the queue
//    at in_addr_i (credit counted against its FIFO), stores the answers in
//    its FIFO and writes the oldest one into the register file whenever the
//    register holds no fresh value. Each value serves reuse_i reads of the
//    register (0 counts as 1) before the next one is written.
//  * QLR_OUT: every write-back of the core to the register is captured from
//    the write port and pushed to the queue at out_addr_i.
//  * QLR_INOUT: like QLR_IN, and every popped value is also pushed to the
//    queue at out_addr_i (forwarding, for chains of PEs).
//  * QLR_OFF: idle; FIFOs and counters are cleared.
// Hazards: an instruction that reads the register while no fresh value is
// there (RAW), or that writes it while the outgoing FIFO has no free slot
// left (WAW on a full queue), gets stall_o, which overrides the scoreboard.
// A slot is reserved when such a writer issues and filled at its write-back.
// Interfaces: snoop (reads_i/writes_i of the instruction at issue, issue_i,
// wb_valid_i/wb_data_i of a write-back to this register), register-file
// write request rf_valid_o/rf_ready_i, and a memory request/answer port.
// Requests carry tag bit 0 = 1 for pops and 0 for pushes.
// Modes, reuse, FIFO and the four interfaces follow the paper; FIFO depth,
// the credit scheme and the second (forward) address are design choices.
module qlr
  import mempool_pkg::*;
#(
  parameter int unsigned Depth = 4,
  localparam int unsigned CntW = $clog2(Depth + 1)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  // configuration (CSRs)
  input  qlr_mode_e mode_i,
  input  addr_t     in_addr_i,
  input  addr_t     out_addr_i,
  input  logic [7:0] reuse_i,
  // instruction decoder / scoreboard
  input  logic      reads_i,
  input  logic      writes_i,
  input  logic      issue_i,
  output logic      stall_o,
  // register-file write port snoop
  input  logic      wb_valid_i,
  input  data_t     wb_data_i,
  // register-file write-back of popped data
  output logic      rf_valid_o,
  input  logic      rf_ready_i,
  output data_t     rf_data_o,
  // memory port (through the core's LSU)
  output logic      req_valid_o,
  input  logic      req_ready_i,
  output mem_op_e   req_op_o,
  output addr_t     req_addr_o,
  output data_t     req_wdata_o,
  output tag_t      req_tag_o,
  input  logic      rsp_valid_i,
  input  data_t     rsp_data_i,
  input  tag_t      rsp_tag_i,
  // observation
  output logic      busy_o
);
  logic in_mode, out_mode, fwd_mode, off;
  assign in_mode  = (mode_i == QLR_IN) || (mode_i == QLR_INOUT);
  assign out_mode = (mode_i == QLR_OUT);
  assign fwd_mode = (mode_i == QLR_INOUT);
  assign off      = (mode_i == QLR_OFF);

  // ---------------- incoming side ----------------
  logic [CntW-1:0] in_cnt, out_cnt, pops_q, resv_q;
  logic in_valid, in_pop;
  data_t in_head;
  logic pop_rsp, push_rsp;
  assign pop_rsp  = rsp_valid_i &&  rsp_tag_i[0];
  assign push_rsp = rsp_valid_i && !rsp_tag_i[0];

  stream_fifo #(.Depth(Depth), .T(data_t)) i_in_fifo (
    .clk_i, .rst_ni, .flush_i(off),
    .in_valid_i(pop_rsp && in_mode), .in_ready_o(), .in_data_i(rsp_data_i),
    .out_valid_o(in_valid), .out_ready_i(in_pop), .out_data_o(in_head), .count_o(in_cnt)
  );

  logic reg_valid_q;
  logic [7:0] uses_q;
  logic [7:0] reuse_n;
  assign reuse_n = (reuse_i == 8'd0) ? 8'd1 : reuse_i;

  assign rf_valid_o = in_mode && !reg_valid_q && in_valid;
  assign rf_data_o  = in_head;
  assign in_pop     = rf_valid_o && rf_ready_i;

  // ---------------- outgoing side ----------------
  logic out_push, out_valid, out_pop;
  data_t out_in, out_head;
  assign out_push = out_mode ? wb_valid_i : (fwd_mode && pop_rsp);
  assign out_in   = out_mode ? wb_data_i : rsp_data_i;

  stream_fifo #(.Depth(Depth), .T(data_t)) i_out_fifo (
    .clk_i, .rst_ni, .flush_i(off),
    .in_valid_i(out_push), .in_ready_o(), .in_data_i(out_in),
    .out_valid_o(out_valid), .out_ready_i(out_pop), .out_data_o(out_head), .count_o(out_cnt)
  );

  // ---------------- memory requests ----------------
  // Pops are issued while the answers are sure to find room in the FIFOs.
  logic pop_credit, want_pop, want_push;
  assign pop_credit = (32'(in_cnt) + 32'(pops_q) < Depth) &&
                      (!fwd_mode || (32'(out_cnt) + 32'(pops_q) < Depth));
  assign want_push  = out_valid;
  assign want_pop   = in_mode && pop_credit;

  assign req_valid_o = want_push || want_pop;
  assign req_op_o    = want_push ? OP_QPUSH : OP_QPOP;
  assign req_addr_o  = want_push ? out_addr_i : in_addr_i;
  assign req_wdata_o = out_head;
  assign req_tag_o   = want_push ? 8'h00 : 8'h01;
  assign out_pop     = want_push && req_ready_i;

  logic pop_sent;
  assign pop_sent = !want_push && want_pop && req_ready_i;

  // ---------------- hazards ----------------
  logic raw, waw;
  assign raw     = reads_i  && in_mode && !reg_valid_q;
  assign waw     = writes_i && out_mode && (32'(out_cnt) + 32'(resv_q) >= Depth);
  assign stall_o = raw || waw;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pops_q <= '0; resv_q <= '0; reg_valid_q <= 1'b0; uses_q <= '0;
    end else if (off) begin
      pops_q <= '0; resv_q <= '0; reg_valid_q <= 1'b0; uses_q <= '0;
    end else begin
      // pops in flight
      if (pop_sent && !pop_rsp)      pops_q <= pops_q + 1'b1;
      else if (!pop_sent && pop_rsp) pops_q <= pops_q - 1'b1;
      // reserved outgoing slots
      if (out_mode) begin
        if ((issue_i && writes_i) && !wb_valid_i)                   resv_q <= resv_q + 1'b1;
        else if (!(issue_i && writes_i) && wb_valid_i && resv_q != '0) resv_q <= resv_q - 1'b1;
      end
      // register value and its remaining uses
      if (in_pop) begin
        reg_valid_q <= 1'b1;
        uses_q      <= reuse_n;
      end else if (in_mode && issue_i && reads_i && reg_valid_q) begin
        uses_q <= uses_q - 1'b1;
        if (uses_q == 8'd1) reg_valid_q <= 1'b0;
      end
    end
  end

  assign busy_o = (pops_q != '0) || out_valid || (resv_q != '0);

  a_no_issue_on_stall: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                        issue_i |-> !stall_o);
  a_out_room: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               out_push |-> 32'(out_cnt) < Depth);
  a_pop_rsp_expected: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                              pop_rsp && !off |-> pops_q != '0);
  logic unused;
  assign unused = ^{push_rsp, rsp_tag_i[7:1]};
endmodule
