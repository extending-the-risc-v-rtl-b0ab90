// rnn_alu: integer ALU of the execute stage (RV32I arithmetic, logic, shifts, compares).
//
// Combinational. result_o is the operation's value. The comparison operations (EQ, NE, LT,
// GE, LTU, GEU) return 0 or 1 in result_o and the same bit on cmp_o. The execute stage uses
// cmp_o as the branch condition and result_o for SLT/SLTU. Shifts use b_i[4:0]. This is the
// baseline core's functionality. Its structure is this design's own.
module rnn_alu
  import rnn_pkg::*;
(
  input  alu_op_e     op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] result_o,
  output logic        cmp_o
);

  always_comb begin
    cmp_o = 1'b0;
    unique case (op_i)
      ALU_EQ:  cmp_o = (a_i == b_i);
      ALU_NE:  cmp_o = (a_i != b_i);
      ALU_LT:  cmp_o = ($signed(a_i) <  $signed(b_i));
      ALU_GE:  cmp_o = ($signed(a_i) >= $signed(b_i));
      ALU_LTU: cmp_o = (a_i <  b_i);
      ALU_GEU: cmp_o = (a_i >= b_i);
      default: cmp_o = 1'b0;
    endcase
    unique case (op_i)
      ALU_ADD: result_o = a_i + b_i;
      ALU_SUB: result_o = a_i - b_i;
      ALU_SLL: result_o = a_i << b_i[4:0];
      ALU_SRL: result_o = a_i >> b_i[4:0];
      ALU_SRA: result_o = 32'($signed(a_i) >>> b_i[4:0]);
      ALU_XOR: result_o = a_i ^ b_i;
      ALU_OR:  result_o = a_i | b_i;
      ALU_AND: result_o = a_i & b_i;
      default: result_o = {31'd0, cmp_o};
    endcase
  end

endmodule
