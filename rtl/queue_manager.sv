// Xqueue queue manager of one bank controller.
//
// Keeps the head and tail pointers of the bank's memory-mapped queue in
// registers, so that q.push / q.pop never spend a memory access on pointer
// bookkeeping. The queue is a circular buffer of Depth entries; empty is
// head == tail and full is tail + 1 == head, which leaves one entry unused.
// That unused entry holds the operand of a push that arrives while the queue
// is full: the controller writes it at the tail but the tail only advances
// (and the push is answered) when a pop frees a slot. A pop that finds the
// queue empty is parked and is served after the next push. Only one parked
// pop and one parked push exist at a time; a further request of the same
// kind is refused (accept_o low), which back-pressures the issuing core.
//
// Interface: the controller presents a queue request (req_valid_i, push or
// pop, its meta) and reads accept_o, respond_o (answer now) and ptr_o (slot
// to access, relative to the queue base). req_fire_i says it executed it.
// pop_due_o asks the controller to serve a parked pop from slot ptr_head_o
// (acknowledged with pop_srv_i); push_ack_due_o asks it to send the late
// answer of a parked push (push_ack_i). The controller serialises these, so
// at most one of req_fire_i, pop_srv_i, push_ack_i is high in a cycle.
// Head/tail registers and the stall-on-boundary behaviour follow the paper;
// the parked-request encoding is this design's own.
module queue_manager #(
  parameter int unsigned Depth = 4,
  parameter type         meta_t = logic [18:0],
  localparam int unsigned PtrW = $clog2(Depth)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            req_valid_i,
  input  logic            req_push_i,
  input  meta_t           req_meta_i,
  output logic            accept_o,
  output logic            respond_o,
  output logic [PtrW-1:0] ptr_o,
  input  logic            req_fire_i,
  output logic            pop_due_o,
  output meta_t           pop_meta_o,
  output logic [PtrW-1:0] ptr_head_o,
  input  logic            pop_srv_i,
  output logic            push_ack_due_o,
  output meta_t           push_meta_o,
  input  logic            push_ack_i,
  output logic            empty_o,
  output logic            full_o
);
  logic [PtrW-1:0] head_q, tail_q;
  logic pend_pop_q, pop_due_q, pend_push_q, push_ack_q;
  meta_t pop_meta_q, push_meta_q;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (32'(p) == Depth - 1) ? '0 : p + 1'b1;
  endfunction

  logic empty, full;
  assign empty = (head_q == tail_q);
  assign full  = (incr(tail_q) == head_q);
  assign empty_o = empty;
  assign full_o  = full;

  // One outstanding pop (parked or due) and one outstanding push at a time.
  assign accept_o  = req_push_i ? !(pend_push_q || push_ack_q) : !(pend_pop_q || pop_due_q);
  assign respond_o = req_push_i ? !full : !empty;
  assign ptr_o     = req_push_i ? tail_q : head_q;

  assign pop_due_o      = pop_due_q;
  assign pop_meta_o     = pop_meta_q;
  assign ptr_head_o     = head_q;
  assign push_ack_due_o = push_ack_q;
  assign push_meta_o    = push_meta_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      head_q <= '0; tail_q <= '0;
      pend_pop_q <= 1'b0; pop_due_q <= 1'b0;
      pend_push_q <= 1'b0; push_ack_q <= 1'b0;
      pop_meta_q <= '0; push_meta_q <= '0;
    end else begin
      if (push_ack_i) push_ack_q <= 1'b0;
      if (req_fire_i && req_valid_i) begin
        if (req_push_i) begin
          if (!full) begin
            tail_q <= incr(tail_q);
            if (pend_pop_q) begin      // the parked pop can now be served
              pend_pop_q <= 1'b0;
              pop_due_q  <= 1'b1;
            end
          end else begin               // operand sits in the spare slot
            pend_push_q <= 1'b1;
            push_meta_q <= req_meta_i;
          end
        end else begin
          if (!empty) begin
            head_q <= incr(head_q);
            if (pend_push_q) begin     // a slot is free: complete the parked push
              tail_q      <= incr(tail_q);
              pend_push_q <= 1'b0;
              push_ack_q  <= 1'b1;
            end
          end else begin
            pend_pop_q <= 1'b1;
            pop_meta_q <= req_meta_i;
          end
        end
      end else if (pop_srv_i) begin
        head_q    <= incr(head_q);
        pop_due_q <= 1'b0;
        if (pend_push_q) begin
          tail_q      <= incr(tail_q);
          pend_push_q <= 1'b0;
          push_ack_q  <= 1'b1;
        end
      end
    end
  end

  a_one_event: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                $onehot0({req_fire_i, pop_srv_i, push_ack_i}));
  a_srv_when_due: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   pop_srv_i |-> pop_due_q && !empty);
endmodule
