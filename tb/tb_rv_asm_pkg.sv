// tb_rv_asm_pkg: instruction encoders for the testbenches (a minimal assembler).
// Each function returns the 32-bit encoding of one instruction; the encodings of the
// Xpulp subset and of the RNN extensions are those of rnn_pkg.
package tb_rv_asm_pkg;
  import rnn_pkg::*;

  typedef logic [4:0] reg_t;

  function automatic logic [31:0] r_type(logic [6:0] f7, reg_t rs2, reg_t rs1, logic [2:0] f3, reg_t rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_type(int imm, reg_t rs1, logic [2:0] f3, reg_t rd, logic [6:0] opc);
    logic [11:0] i = 12'(imm);
    return {i, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_type(int imm, reg_t rs2, reg_t rs1, logic [2:0] f3, logic [6:0] opc);
    logic [11:0] i = 12'(imm);
    return {i[11:5], rs2, rs1, f3, i[4:0], opc};
  endfunction

  function automatic logic [31:0] addi(reg_t rd, reg_t rs1, int imm); return i_type(imm, rs1, 3'b000, rd, OPC_OPIMM); endfunction
  function automatic logic [31:0] slli(reg_t rd, reg_t rs1, int sh);  return i_type(sh, rs1, 3'b001, rd, OPC_OPIMM); endfunction
  function automatic logic [31:0] srai(reg_t rd, reg_t rs1, int sh);  return i_type(sh | 32'h400, rs1, 3'b101, rd, OPC_OPIMM); endfunction
  function automatic logic [31:0] xori(reg_t rd, reg_t rs1, int imm); return i_type(imm, rs1, 3'b100, rd, OPC_OPIMM); endfunction
  function automatic logic [31:0] lui(reg_t rd, int imm20);           return {20'(imm20), rd, OPC_LUI}; endfunction
  function automatic logic [31:0] add(reg_t rd, reg_t a, reg_t b);    return r_type(7'b0000000, b, a, 3'b000, rd, OPC_OP); endfunction
  function automatic logic [31:0] sub(reg_t rd, reg_t a, reg_t b);    return r_type(7'b0100000, b, a, 3'b000, rd, OPC_OP); endfunction
  function automatic logic [31:0] slt(reg_t rd, reg_t a, reg_t b);    return r_type(7'b0000000, b, a, 3'b010, rd, OPC_OP); endfunction
  function automatic logic [31:0] mul(reg_t rd, reg_t a, reg_t b);    return r_type(F7_MULDIV, b, a, 3'b000, rd, OPC_OP); endfunction
  function automatic logic [31:0] mulh(reg_t rd, reg_t a, reg_t b);   return r_type(F7_MULDIV, b, a, 3'b001, rd, OPC_OP); endfunction
  function automatic logic [31:0] p_mac(reg_t rd, reg_t a, reg_t b);  return r_type(F7_P_MAC, b, a, 3'b000, rd, OPC_OP); endfunction
  function automatic logic [31:0] lw(reg_t rd, int imm, reg_t rs1);   return i_type(imm, rs1, 3'b010, rd, OPC_LOAD); endfunction
  function automatic logic [31:0] lh(reg_t rd, int imm, reg_t rs1);   return i_type(imm, rs1, 3'b001, rd, OPC_LOAD); endfunction
  function automatic logic [31:0] lbu(reg_t rd, int imm, reg_t rs1);  return i_type(imm, rs1, 3'b100, rd, OPC_LOAD); endfunction
  function automatic logic [31:0] p_lw(reg_t rd, int imm, reg_t rs1); return i_type(imm, rs1, 3'b010, rd, OPC_LOAD_POST); endfunction
  function automatic logic [31:0] sw(reg_t rs2, int imm, reg_t rs1);  return s_type(imm, rs2, rs1, 3'b010, OPC_STORE); endfunction
  function automatic logic [31:0] sh(reg_t rs2, int imm, reg_t rs1);  return s_type(imm, rs2, rs1, 3'b001, OPC_STORE); endfunction
  function automatic logic [31:0] sb(reg_t rs2, int imm, reg_t rs1);  return s_type(imm, rs2, rs1, 3'b000, OPC_STORE); endfunction
  function automatic logic [31:0] p_sw(reg_t rs2, int imm, reg_t rs1);return s_type(imm, rs2, rs1, 3'b010, OPC_STORE_POST); endfunction
  function automatic logic [31:0] bne(reg_t a, reg_t b, int off);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], b, a, 3'b001, o[4:1], o[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] blt(reg_t a, reg_t b, int off);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], b, a, 3'b100, o[4:1], o[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] jal(reg_t rd, int off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], rd, OPC_JAL};
  endfunction
  function automatic logic [31:0] jalr(reg_t rd, reg_t rs1, int imm); return i_type(imm, rs1, 3'b000, rd, OPC_JALR); endfunction
  function automatic logic [31:0] pv_sdotsp_h(reg_t rd, reg_t a, reg_t b) ; return r_type(F7_PV_SDOTSP_H, b, a, 3'b000, rd, OPC_VECOP); endfunction
  function automatic logic [31:0] pl_sdotsp_h(bit n, reg_t rd, reg_t a, reg_t b);
    return r_type(n ? F7_PL_SDOTSP_1 : F7_PL_SDOTSP_0, b, a, 3'b000, rd, OPC_VECOP);
  endfunction
  function automatic logic [31:0] pl_tanh(reg_t rd, reg_t a); return r_type(F7_PL_TANH, 5'd0, a, 3'b000, rd, OPC_VECOP); endfunction
  function automatic logic [31:0] pl_sig(reg_t rd, reg_t a);  return r_type(F7_PL_SIG,  5'd0, a, 3'b000, rd, OPC_VECOP); endfunction
  // lp.setupi L, n, count (assembly operand order): the n instructions after it run count
  // times. The function takes its arguments as (L, count, n).
  function automatic logic [31:0] lp_setupi(bit l, int count, int n);
    return {12'(count), 5'(n), F3_LP_SETUPI, 4'd0, l, OPC_HWLOOP};
  endfunction
  // lp.setup L, n, rs1: the same with the count taken from rs1; arguments (L, rs1, n)
  function automatic logic [31:0] lp_setup(bit l, reg_t rs1, int n);
    return {12'(n), rs1, F3_LP_SETUP, 4'd0, l, OPC_HWLOOP};
  endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction

endpackage
