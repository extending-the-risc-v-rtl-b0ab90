// rnn_dotp_mult: the multiplier of the execute stage, combinational, one result per cycle.
//
// Operations (op_i):
//   MUL_MUL, MUL_MULH, MUL_MULHSU, MUL_MULHU  RV32M products of op_a_i and op_b_i
//   MUL_MAC     p.mac:       op_c_i + op_a_i * op_b_i              (low 32 bits)
//   MUL_SDOTSP  sum-of-dot-product on packed signed half-words:
//               op_c_i + op_a_i[31:16]*op_b_i[31:16] + op_a_i[15:0]*op_b_i[15:0]
// op_c_i is the old value of rd (the accumulator). For pv.sdotsp.h, op_a_i is rs1. For the
// extension pl.sdotsp.h, the execute stage instead feeds op_a_i from a special-purpose
// register. That operand multiplexer sits outside this unit.
// The SIMD sum-of-dot-product follows the paper. The RV32M part is the baseline core's.
// Division is not implemented.
module rnn_dotp_mult
  import rnn_pkg::*;
(
  input  mult_op_e    op_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  output logic [31:0] result_o
);

  logic signed [16:0] a_hi, a_lo, b_hi, b_lo;   // 17 bits: room for the sign
  logic signed [33:0] p_hi, p_lo;
  logic signed [65:0] prod;
  logic signed [32:0] a_ext, b_ext;

  always_comb begin
    a_hi = 17'(signed'(op_a_i[31:16]));
    a_lo = 17'(signed'(op_a_i[15:0]));
    b_hi = 17'(signed'(op_b_i[31:16]));
    b_lo = 17'(signed'(op_b_i[15:0]));
    p_hi = a_hi * b_hi;
    p_lo = a_lo * b_lo;

    // 33-bit operands: signed or zero extended as the RV32M variant requires
    a_ext = (op_i == MUL_MULHU) ? $signed({1'b0, op_a_i}) : $signed({op_a_i[31], op_a_i});
    b_ext = (op_i == MUL_MULHU || op_i == MUL_MULHSU) ? $signed({1'b0, op_b_i})
                                                       : $signed({op_b_i[31], op_b_i});
    prod  = a_ext * b_ext;

    unique case (op_i)
      MUL_MUL:    result_o = prod[31:0];
      MUL_MULH,
      MUL_MULHSU,
      MUL_MULHU:  result_o = prod[63:32];
      MUL_MAC:    result_o = op_c_i + prod[31:0];
      MUL_SDOTSP: result_o = op_c_i + p_hi[31:0] + p_lo[31:0];
      default:    result_o = prod[31:0];
    endcase
  end

endmodule
