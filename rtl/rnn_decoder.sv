// rnn_decoder: combinational instruction decoder of the ID/EX stage.
//
// Turns a 32-bit instruction into the ctrl_t struct of rnn_pkg. Supported instructions:
//   RV32I    lui auipc jal jalr beq..bgeu lb lh lw lbu lhu sb sh sw, the immediate and
//            register ALU operations, fence (no operation), ecall/ebreak (halt)
//   RV32M    mul mulh mulhsu mulhu (division is not implemented and decodes as illegal)
//   Xpulp    p.lb/p.lh/p.lw/p.lbu/p.lhu rd, imm(rs1!)   load, then rs1 += imm
//            p.s{b,h,w} rs2, imm(rs1!)             store, then rs1 += imm
//            p.mac rd, rs1, rs2                         rd += rs1*rs2
//            pv.sdotsp.h rd, rs1, rs2                   rd += rs1.h1*rs2.h1 + rs1.h0*rs2.h0
//            lp.setupi L, n, count                      count = uimm12, last body instr at pc+4n
//            lp.setup  L, n, rs1                        count = rs1,    last body instr at pc+4n
//   new      pl.sdotsp.h.N rd, rs1, rs2 (N = 0,1)       rd += SPR_N.h1*rs2.h1 + SPR_N.h0*rs2.h0,
//                                                       SPR_N <= mem[rs1], rs1 += 4
//            pl.tanh rd, rs1 / pl.sig rd, rs1           Q3.12 activation functions
// The encodings are listed in rnn_pkg. The paper names the new instructions and their
// semantics but not their bit patterns. The fields chosen here follow the style of the
// Xpulp custom opcodes. Anything else decodes as illegal, and the core halts on it.
module rnn_decoder
  import rnn_pkg::*;
(
  input  logic [31:0] instr_i,
  output ctrl_t       ctrl_o
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign funct7 = instr_i[31:25];
  assign imm_i  = {{20{instr_i[31]}}, instr_i[31:20]};
  assign imm_s  = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
  assign imm_b  = {{19{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
  assign imm_u  = {instr_i[31:12], 12'd0};
  assign imm_j  = {{11{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};

  always_comb begin
    ctrl_o          = '0;
    ctrl_o.opa_sel  = OPA_REG;
    ctrl_o.alu_op   = ALU_ADD;
    ctrl_o.mult_op  = MUL_MUL;
    ctrl_o.res_sel  = RES_ALU;
    ctrl_o.mem_size = SIZE_W;

    unique case (opcode)
      OPC_LUI: begin
        ctrl_o.opa_sel = OPA_ZERO; ctrl_o.opb_imm = 1'b1; ctrl_o.imm = imm_u; ctrl_o.rf_we = 1'b1;
      end
      OPC_AUIPC: begin
        ctrl_o.opa_sel = OPA_PC; ctrl_o.opb_imm = 1'b1; ctrl_o.imm = imm_u; ctrl_o.rf_we = 1'b1;
      end
      OPC_JAL: begin
        ctrl_o.jal = 1'b1; ctrl_o.imm = imm_j; ctrl_o.res_sel = RES_LINK; ctrl_o.rf_we = 1'b1;
      end
      OPC_JALR: begin
        ctrl_o.jalr = 1'b1; ctrl_o.use_rs1 = 1'b1; ctrl_o.opb_imm = 1'b1; ctrl_o.imm = imm_i;
        ctrl_o.res_sel = RES_LINK; ctrl_o.rf_we = 1'b1;
        ctrl_o.illegal = (funct3 != 3'b000);
      end
      OPC_BRANCH: begin
        ctrl_o.branch = 1'b1; ctrl_o.use_rs1 = 1'b1; ctrl_o.use_rs2 = 1'b1; ctrl_o.imm = imm_b;
        unique case (funct3)
          3'b000:  ctrl_o.alu_op = ALU_EQ;
          3'b001:  ctrl_o.alu_op = ALU_NE;
          3'b100:  ctrl_o.alu_op = ALU_LT;
          3'b101:  ctrl_o.alu_op = ALU_GE;
          3'b110:  ctrl_o.alu_op = ALU_LTU;
          3'b111:  ctrl_o.alu_op = ALU_GEU;
          default: ctrl_o.illegal = 1'b1;
        endcase
      end
      OPC_LOAD, OPC_LOAD_POST: begin
        ctrl_o.mem_req = 1'b1; ctrl_o.use_rs1 = 1'b1; ctrl_o.imm = imm_i;
        ctrl_o.opb_imm = 1'b1;
        ctrl_o.mem_postinc = (opcode == OPC_LOAD_POST);
        ctrl_o.rf_we = (opcode == OPC_LOAD_POST);       // EX writes rs1 <= rs1 + imm
        ctrl_o.mem_signed = ~funct3[2];
        unique case (funct3)
          3'b000, 3'b100: ctrl_o.mem_size = SIZE_B;
          3'b001, 3'b101: ctrl_o.mem_size = SIZE_H;
          3'b010:         ctrl_o.mem_size = SIZE_W;
          default:        ctrl_o.illegal  = 1'b1;
        endcase
      end
      OPC_STORE, OPC_STORE_POST: begin
        ctrl_o.mem_req = 1'b1; ctrl_o.mem_we = 1'b1; ctrl_o.use_rs1 = 1'b1; ctrl_o.use_rs2 = 1'b1;
        ctrl_o.imm = imm_s; ctrl_o.opb_imm = 1'b1;
        ctrl_o.mem_postinc = (opcode == OPC_STORE_POST);
        ctrl_o.rf_we = (opcode == OPC_STORE_POST);
        unique case (funct3)
          3'b000:  ctrl_o.mem_size = SIZE_B;
          3'b001:  ctrl_o.mem_size = SIZE_H;
          3'b010:  ctrl_o.mem_size = SIZE_W;
          default: ctrl_o.illegal  = 1'b1;
        endcase
      end
      OPC_OPIMM: begin
        ctrl_o.use_rs1 = 1'b1; ctrl_o.opb_imm = 1'b1; ctrl_o.imm = imm_i; ctrl_o.rf_we = 1'b1;
        unique case (funct3)
          3'b000: ctrl_o.alu_op = ALU_ADD;
          3'b010: ctrl_o.alu_op = ALU_LT;
          3'b011: ctrl_o.alu_op = ALU_LTU;
          3'b100: ctrl_o.alu_op = ALU_XOR;
          3'b110: ctrl_o.alu_op = ALU_OR;
          3'b111: ctrl_o.alu_op = ALU_AND;
          3'b001: begin
            ctrl_o.alu_op = ALU_SLL; ctrl_o.illegal = (funct7 != 7'b0000000);
          end
          3'b101: begin
            ctrl_o.alu_op  = instr_i[30] ? ALU_SRA : ALU_SRL;
            ctrl_o.illegal = (funct7 != 7'b0000000) && (funct7 != 7'b0100000);
          end
          default: ;
        endcase
      end
      OPC_OP: begin
        ctrl_o.use_rs1 = 1'b1; ctrl_o.use_rs2 = 1'b1; ctrl_o.rf_we = 1'b1;
        if (funct7 == F7_MULDIV) begin
          ctrl_o.res_sel = RES_MULT;
          unique case (funct3)
            3'b000:  ctrl_o.mult_op = MUL_MUL;
            3'b001:  ctrl_o.mult_op = MUL_MULH;
            3'b010:  ctrl_o.mult_op = MUL_MULHSU;
            3'b011:  ctrl_o.mult_op = MUL_MULHU;
            default: ctrl_o.illegal = 1'b1;           // division not implemented
          endcase
        end else if (funct7 == F7_P_MAC && funct3 == 3'b000) begin
          ctrl_o.res_sel = RES_MULT; ctrl_o.mult_op = MUL_MAC; ctrl_o.use_rd_src = 1'b1;
        end else if (funct7 == 7'b0000000 || funct7 == 7'b0100000) begin
          unique case (funct3)
            3'b000: ctrl_o.alu_op = instr_i[30] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl_o.alu_op = ALU_SLL;
            3'b010: ctrl_o.alu_op = ALU_LT;
            3'b011: ctrl_o.alu_op = ALU_LTU;
            3'b100: ctrl_o.alu_op = ALU_XOR;
            3'b101: ctrl_o.alu_op = instr_i[30] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl_o.alu_op = ALU_OR;
            3'b111: ctrl_o.alu_op = ALU_AND;
            default: ;
          endcase
          ctrl_o.illegal = instr_i[30] && (funct3 != 3'b000) && (funct3 != 3'b101);
        end else begin
          ctrl_o.illegal = 1'b1;
        end
      end
      OPC_VECOP: begin
        ctrl_o.use_rs1 = 1'b1; ctrl_o.rf_we = 1'b1;
        if (funct3 != 3'b000) begin
          ctrl_o.illegal = 1'b1;
        end else begin
          unique case (funct7)
            F7_PV_SDOTSP_H: begin
              ctrl_o.use_rs2 = 1'b1; ctrl_o.use_rd_src = 1'b1;
              ctrl_o.res_sel = RES_MULT; ctrl_o.mult_op = MUL_SDOTSP;
            end
            F7_PL_SDOTSP_0, F7_PL_SDOTSP_1: begin
              ctrl_o.use_rs2 = 1'b1; ctrl_o.use_rd_src = 1'b1;
              ctrl_o.res_sel = RES_MULT; ctrl_o.mult_op = MUL_SDOTSP;
              ctrl_o.mult_spr = 1'b1; ctrl_o.spr_idx = funct7[1];
              ctrl_o.mem_req = 1'b1; ctrl_o.mem_to_spr = 1'b1; ctrl_o.mem_size = SIZE_W;
              ctrl_o.imm = 32'd4;                      // address increment of rs1
            end
            F7_PL_TANH, F7_PL_SIG: begin
              ctrl_o.res_sel = RES_ACT; ctrl_o.act_sig = funct7[0];
              ctrl_o.illegal = (instr_i[24:20] != 5'd0);
            end
            default: ctrl_o.illegal = 1'b1;
          endcase
        end
      end
      OPC_HWLOOP: begin
        ctrl_o.hwlp_we  = 1'b1;
        ctrl_o.hwlp_idx = instr_i[7];
        ctrl_o.imm      = {20'd0, instr_i[31:20]};                      // count of lp.setupi
        unique case (funct3)
          F3_LP_SETUP: begin
            ctrl_o.use_rs1 = 1'b1; ctrl_o.hwlp_cnt_reg = 1'b1;
            ctrl_o.hwlp_end_off = {18'd0, instr_i[31:20], 2'b00};
          end
          F3_LP_SETUPI: ctrl_o.hwlp_end_off = {25'd0, instr_i[19:15], 2'b00};
          default:      ctrl_o.illegal = 1'b1;
        endcase
        ctrl_o.illegal = ctrl_o.illegal || (instr_i[11:8] != 4'd0);
      end
      OPC_FENCE: ;
      OPC_SYSTEM: begin
        if (instr_i[31:21] == 11'd0 && instr_i[19:7] == 13'd0) ctrl_o.halt = 1'b1;  // ecall/ebreak
        else ctrl_o.illegal = 1'b1;
      end
      default: ctrl_o.illegal = 1'b1;
    endcase
  end

endmodule
