// All-to-all valid/ready crossbar: NumIn masters, NumOut slaves. Each input
// names its destination with in_sel_i; each output picks one of the inputs
// that target it with a round-robin arbiter, purely combinationally (zero
// latency). The same module serves as tile crossbar, cluster-level remote
// interconnect, request demultiplexer (NumIn = 1) and merger (NumOut = 1).
//
// The round-robin pointer of an output moves past the chosen input in every
// cycle in which that output offers a request, accepted or not. A bank
// controller may refuse one queue request (a second pop on an empty queue)
// while it must accept another (the push that fills it); rotating on refusal
// keeps a refused request from starving the others at the same output.
// Consequently an output's valid can drop without a handshake; each input
// keeps valid/ready semantics. This rotation is this design's own choice.
module stream_xbar #(
  parameter int unsigned NumIn  = 4,
  parameter int unsigned NumOut = 16,
  parameter type         T      = logic [31:0],
  localparam int unsigned SelW  = (NumOut > 1) ? $clog2(NumOut) : 1,
  localparam int unsigned IdxW  = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            in_valid_i [NumIn],
  output logic            in_ready_o [NumIn],
  input  T                in_data_i  [NumIn],
  input  logic [SelW-1:0] in_sel_i   [NumIn],
  output logic            out_valid_o [NumOut],
  input  logic            out_ready_i [NumOut],
  output T                out_data_o  [NumOut]
);
  logic [IdxW-1:0] prio_q [NumOut];
  logic [IdxW-1:0] gnt    [NumOut];

  for (genvar o = 0; o < NumOut; o++) begin : g_out
    always_comb begin
      int unsigned idx;
      out_valid_o[o] = 1'b0;
      gnt[o]         = '0;
      for (int unsigned k = 0; k < NumIn; k++) begin
        idx = (32'(prio_q[o]) + k) % NumIn;
        if (!out_valid_o[o] && in_valid_i[idx] && (32'(in_sel_i[idx]) == o)) begin
          out_valid_o[o] = 1'b1;
          gnt[o]         = IdxW'(idx);
        end
      end
      out_data_o[o] = in_data_i[gnt[o]];
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)             prio_q[o] <= '0;
      else if (out_valid_o[o]) prio_q[o] <= IdxW'((32'(gnt[o]) + 1) % NumIn);
    end
  end

  for (genvar i = 0; i < NumIn; i++) begin : g_in
    always_comb begin
      in_ready_o[i] = 1'b0;
      for (int unsigned o = 0; o < NumOut; o++)
        if (32'(in_sel_i[i]) == o)
          in_ready_o[i] = out_valid_o[o] && out_ready_i[o] && (32'(gnt[o]) == i);
    end
  end
endmodule
