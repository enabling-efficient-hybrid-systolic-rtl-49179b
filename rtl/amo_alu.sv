// Atomic-memory-operation ALU of a bank controller. Given the word read from
// the bank (old) and the core's operand, it returns the word to write back
// for the RISC-V "A" extension AMOs: swap, add, xor, and, or, signed and
// unsigned min/max. Purely combinational. The paper names this block in its
// memory-controller figure; the operation set is the RISC-V one.
module amo_alu
  import mempool_pkg::*;
(
  input  mem_op_e op_i,
  input  data_t   operand_i,
  input  data_t   old_i,
  output data_t   result_o
);
  always_comb begin
    unique case (op_i)
      OP_AMO_SWAP: result_o = operand_i;
      OP_AMO_ADD:  result_o = old_i + operand_i;
      OP_AMO_XOR:  result_o = old_i ^ operand_i;
      OP_AMO_AND:  result_o = old_i & operand_i;
      OP_AMO_OR:   result_o = old_i | operand_i;
      OP_AMO_MIN:  result_o = ($signed(old_i) < $signed(operand_i)) ? old_i : operand_i;
      OP_AMO_MAX:  result_o = ($signed(old_i) > $signed(operand_i)) ? old_i : operand_i;
      OP_AMO_MINU: result_o = (old_i < operand_i) ? old_i : operand_i;
      OP_AMO_MAXU: result_o = (old_i > operand_i) ? old_i : operand_i;
      default:     result_o = old_i;
    endcase
  end
endmodule
