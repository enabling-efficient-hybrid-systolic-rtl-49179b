// Valid/ready FIFO used as a register slice on the interconnect and as the
// internal buffer of a queue-linked register. Depth entries, no fall-through:
// data written in one cycle is visible at the output the next cycle, so each
// FIFO adds one cycle of latency and keeps full throughput for Depth >= 2.
// The count output lets the owner reserve space (credit counting).
module stream_fifo #(
  parameter int unsigned Depth = 2,
  parameter type         T     = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic flush_i,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o,
  output logic [$clog2(Depth+1)-1:0] count_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T mem_q [Depth];
  logic [PtrW-1:0] rd_q, wr_q;
  logic [$clog2(Depth+1)-1:0] cnt_q;

  logic push, pop;
  assign in_ready_o  = (cnt_q != Depth[$clog2(Depth+1)-1:0]);
  assign out_valid_o = (cnt_q != '0);
  assign out_data_o  = mem_q[rd_q];
  assign count_o     = cnt_q;
  assign push = in_valid_i & in_ready_o;
  assign pop  = out_valid_o & out_ready_i;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (32'(p) == Depth - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else if (flush_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      if (push && !pop)      cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk_i) if (push) mem_q[wr_q] <= in_data_i;

  // Handshake rule: once offered, an output stays offered until taken.
  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                                 out_valid_o && !out_ready_i |=> out_valid_o);
endmodule
