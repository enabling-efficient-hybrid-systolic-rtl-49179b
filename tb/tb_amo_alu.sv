// Self-checking test of amo_alu: random operands for every AMO, expected
// values computed here with 64-bit signed/unsigned arithmetic.
module tb_amo_alu;
  import mempool_pkg::*;
  mem_op_e op;
  data_t a, b, r;
  int checks = 0, failures = 0;
  amo_alu dut (.op_i(op), .operand_i(a), .old_i(b), .result_o(r));

  function automatic data_t expect_val(mem_op_e o, data_t x, data_t old);
    longint sx = longint'($signed(x)), so = longint'($signed(old));
    longint ux = longint'({32'd0, x}), uo = longint'({32'd0, old});
    case (o)
      OP_AMO_SWAP: return x;
      OP_AMO_ADD:  return data_t'(ux + uo);
      OP_AMO_XOR:  return x ^ old;
      OP_AMO_AND:  return x & old;
      OP_AMO_OR:   return x | old;
      OP_AMO_MIN:  return (so <= sx) ? old : x;
      OP_AMO_MAX:  return (so >= sx) ? old : x;
      OP_AMO_MINU: return (uo <= ux) ? old : x;
      OP_AMO_MAXU: return (uo >= ux) ? old : x;
      default:     return old;
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 3000; i++) begin
      op = mem_op_e'(4'(2 + (i % 9)));
      a = $urandom; b = (i % 7 == 0) ? a : $urandom;
      if (i % 5 == 0) a[31] = ~b[31];
      #1;
      checks++;
      if (r !== expect_val(op, a, b)) begin
        failures++; $display("op %0d a=%h old=%h got %h", op, a, b, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
