// tb_rnn_decoder: decodes one instruction of every supported kind, assembled in the
// testbench from the instruction formats, and checks the control fields that matter for it.
// Also checks that unsupported encodings (division, CSR access, unknown custom codes)
// are flagged illegal. Last, 2000 random I, S, B, U and J instructions check the decoded
// immediate against a value computed arithmetically from the instruction's bit fields.
module tb_rnn_decoder;
  import rnn_pkg::*;
  logic [31:0] instr;
  ctrl_t c;
  int checks = 0, failures = 0;

  rnn_decoder dut (.instr_i(instr), .ctrl_o(c));

  function automatic logic [31:0] r_type(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                         logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_type(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                         logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction

  task automatic expect_true(input string what, input logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (instr %h)", what, instr);
    end
  endtask

  initial begin
    // addi x5, x6, -3
    instr = i_type(-12'sd3, 5'd6, 3'b000, 5'd5, OPC_OPIMM); #1;
    expect_true("addi", !c.illegal && c.rf_we && c.opb_imm && c.alu_op == ALU_ADD && c.imm == -32'sd3 && c.use_rs1);
    // srai x5, x5, 12
    instr = {7'b0100000, 5'd12, 5'd5, 3'b101, 5'd5, OPC_OPIMM}; #1;
    expect_true("srai", !c.illegal && c.alu_op == ALU_SRA && c.imm[4:0] == 5'd12);
    // sub x1, x2, x3
    instr = r_type(7'b0100000, 5'd3, 5'd2, 3'b000, 5'd1, OPC_OP); #1;
    expect_true("sub", !c.illegal && c.alu_op == ALU_SUB && c.use_rs2 && !c.opb_imm);
    // mul / mulhu / div
    instr = r_type(F7_MULDIV, 5'd3, 5'd2, 3'b000, 5'd1, OPC_OP); #1;
    expect_true("mul", !c.illegal && c.res_sel == RES_MULT && c.mult_op == MUL_MUL);
    instr = r_type(F7_MULDIV, 5'd3, 5'd2, 3'b011, 5'd1, OPC_OP); #1;
    expect_true("mulhu", !c.illegal && c.mult_op == MUL_MULHU);
    instr = r_type(F7_MULDIV, 5'd3, 5'd2, 3'b100, 5'd1, OPC_OP); #1;
    expect_true("div illegal", c.illegal);
    // p.mac
    instr = r_type(F7_P_MAC, 5'd3, 5'd2, 3'b000, 5'd1, OPC_OP); #1;
    expect_true("p.mac", !c.illegal && c.mult_op == MUL_MAC && c.use_rd_src && c.rf_we);
    // lw x7, 8(x9) and p.lw x7, 4(x9!)
    instr = i_type(12'd8, 5'd9, 3'b010, 5'd7, OPC_LOAD); #1;
    expect_true("lw", !c.illegal && c.mem_req && !c.mem_we && !c.rf_we && c.mem_size == SIZE_W && !c.mem_postinc);
    instr = i_type(12'd4, 5'd9, 3'b010, 5'd7, OPC_LOAD_POST); #1;
    expect_true("p.lw", !c.illegal && c.mem_req && c.mem_postinc && c.rf_we && c.imm == 32'd4);
    instr = i_type(12'd2, 5'd9, 3'b101, 5'd7, OPC_LOAD); #1;
    expect_true("lhu", c.mem_size == SIZE_H && !c.mem_signed);
    // sh x3, -2(x4)
    instr = {7'h7f, 5'd3, 5'd4, 3'b001, 5'b11110, OPC_STORE}; #1;
    expect_true("sh", !c.illegal && c.mem_we && c.mem_size == SIZE_H && c.imm == -32'sd2 && c.use_rs2);
    // beq, bltu
    instr = {1'b0, 6'd0, 5'd2, 5'd1, 3'b000, 4'd4, 1'b0, OPC_BRANCH}; #1;
    expect_true("beq", c.branch && c.alu_op == ALU_EQ && c.imm == 32'd8);
    instr = {1'b1, 6'h3f, 5'd2, 5'd1, 3'b110, 4'hc, 1'b1, OPC_BRANCH}; #1;
    expect_true("bltu back", c.branch && c.alu_op == ALU_LTU && c.imm == -32'sd8);
    // jal x1, +16
    instr = {1'b0, 10'd8, 1'b0, 8'd0, 5'd1, OPC_JAL}; #1;
    expect_true("jal", c.jal && c.imm == 32'd16 && c.res_sel == RES_LINK && c.rf_we);
    // lui
    instr = {20'h12345, 5'd3, OPC_LUI}; #1;
    expect_true("lui", c.opa_sel == OPA_ZERO && c.imm == 32'h1234_5000);
    // pv.sdotsp.h x10, x11, x12
    instr = r_type(F7_PV_SDOTSP_H, 5'd12, 5'd11, 3'b000, 5'd10, OPC_VECOP); #1;
    expect_true("pv.sdotsp.h", !c.illegal && c.mult_op == MUL_SDOTSP && !c.mult_spr && !c.mem_req && c.use_rd_src);
    // pl.sdotsp.h.0 / .1
    instr = r_type(F7_PL_SDOTSP_0, 5'd12, 5'd11, 3'b000, 5'd10, OPC_VECOP); #1;
    expect_true("pl.sdotsp.h.0", !c.illegal && c.mult_op == MUL_SDOTSP && c.mult_spr && c.spr_idx == 1'b0 &&
                c.mem_req && c.mem_to_spr && !c.mem_we && c.imm == 32'd4 && c.rf_we);
    instr = r_type(F7_PL_SDOTSP_1, 5'd12, 5'd11, 3'b000, 5'd10, OPC_VECOP); #1;
    expect_true("pl.sdotsp.h.1", !c.illegal && c.mult_spr && c.spr_idx == 1'b1 && c.mem_to_spr);
    // pl.tanh / pl.sig
    instr = r_type(F7_PL_TANH, 5'd0, 5'd11, 3'b000, 5'd10, OPC_VECOP); #1;
    expect_true("pl.tanh", !c.illegal && c.res_sel == RES_ACT && !c.act_sig && c.rf_we);
    instr = r_type(F7_PL_SIG, 5'd0, 5'd11, 3'b000, 5'd10, OPC_VECOP); #1;
    expect_true("pl.sig", !c.illegal && c.res_sel == RES_ACT && c.act_sig);
    // lp.setupi 1, 5, 32 and lp.setup 0, 9, x6
    instr = {12'd32, 5'd5, F3_LP_SETUPI, 4'd0, 1'b1, OPC_HWLOOP}; #1;
    expect_true("lp.setupi", !c.illegal && c.hwlp_we && c.hwlp_idx && !c.hwlp_cnt_reg && c.imm == 32'd32 && c.hwlp_end_off == 32'd20);
    instr = {12'd9, 5'd6, F3_LP_SETUP, 4'd0, 1'b0, OPC_HWLOOP}; #1;
    expect_true("lp.setup", !c.illegal && c.hwlp_we && !c.hwlp_idx && c.hwlp_cnt_reg && c.use_rs1 && c.hwlp_end_off == 32'd36);
    // ebreak, csrrw, unknown vector op
    instr = 32'h0010_0073; #1;
    expect_true("ebreak", c.halt && !c.illegal);
    instr = 32'h3412_9073; #1;
    expect_true("csrrw illegal", c.illegal);
    instr = r_type(7'b1111111, 5'd1, 5'd1, 3'b000, 5'd1, OPC_VECOP); #1;
    expect_true("unknown illegal", c.illegal);
    // random immediates, all five formats
    for (int k = 0; k < 2000; k++) begin
      logic [31:0] r;
      int ref_imm;
      r = $urandom();
      case (k % 5)
        0: begin instr = {r[31:15], 3'b000, r[11:7], OPC_OPIMM};   // addi
             ref_imm = int'(r[31:20]) - (r[31] ? 4096 : 0); end
        1: begin instr = {r[31:15], 3'b010, r[11:7], OPC_STORE};   // sw
             ref_imm = int'(r[31:25]) * 32 + int'(r[11:7]) - (r[31] ? 4096 : 0); end
        2: begin instr = {r[31:15], 3'b000, r[11:7], OPC_BRANCH};  // beq
             ref_imm = int'(r[30:25]) * 32 + int'(r[11:8]) * 2 + int'(r[7]) * 2048 - (r[31] ? 4096 : 0); end
        3: begin instr = {r[31:7], OPC_LUI};
             ref_imm = int'(r[31:12]) * 4096; end
        default: begin instr = {r[31:7], OPC_JAL};
             ref_imm = int'(r[30:21]) * 2 + int'(r[20]) * 2048 + int'(r[19:12]) * 4096 - (r[31] ? (1 << 20) : 0); end
      endcase
      #1;
      checks++;
      if (c.illegal || c.imm !== 32'(ref_imm)) begin
        failures++;
        if (failures < 10) $display("FAIL immediate of %h: %h, expected %h", instr, c.imm, 32'(ref_imm));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
