// rnn_core: RISC-V core extended for RNN inference (RV32IM subset + Xpulp subset + the
// pl.sdotsp.h, pl.tanh and pl.sig extensions).
//
// Pipeline, three stages:
//   IF     rnn_if_stage: fetch over the instruction port, prefetch FIFO, hardware loops.
//   ID/EX  decode (rnn_decoder), register read (rnn_regfile, three read ports), and in the
//          same cycle ALU (rnn_alu), multiplier/dot-product (rnn_dotp_mult), tanh/sigmoid
//          (rnn_act_unit), branch resolution, loop setup and the data request (rnn_lsu).
//          Non-memory results are written through register-file port A at the end of the cycle.
//   WB     the data response: a load writes port B, and a pl.sdotsp.h writes the loaded word
//          into its SPR (rnn_sdot_spr) and the incremented address into rs1 through port B.
//
// The extension pl.sdotsp.h.N rd, rs1, rs2 does, in one issue slot:
//   rd  += SPR_N[31:16]*rs2[31:16] + SPR_N[15:0]*rs2[15:0]  (signed 16-bit, EX)
//   SPR_N <= mem[rs1]                                       (load, WB)
//   rs1 += 4                                                (WB)
// The weight loaded by one pl.sdotsp.h.N is consumed by the next pl.sdotsp.h.N. Alternating
// .0 and .1 therefore never waits for the load.
//
// ID/EX stalls (the instruction stays, the fetch FIFO keeps its head) when:
//   - the memory does not grant a data request (the same stall for lw and pl.sdotsp.h),
//   - a source register, or a destination register (write-after-write), is the target of the
//     load still outstanding in WB. Loaded data is not forwarded, so a load followed by a use
//     costs one bubble with a one-cycle memory,
//   - a pl.sdotsp.h.N reads SPR_N while the load into SPR_N is still outstanding,
//   - a memory instruction meets an outstanding access whose response has not arrived.
// Taken branches, jumps and loop setups redirect the fetch. Instructions fetched after them
// are dropped. ecall/ebreak, or an illegal instruction, stop the core once the outstanding
// access has completed (halted_o, illegal_o).
//
// Memory ports: a req/gnt/rvalid handshake, a word per access, rdata with rvalid in a
// cycle after gnt, and at most one outstanding access per port.
// The extended datapath (SPRs multiplexed into operand A, the load into the SPR alongside
// the MAC, the grant stall, the single-cycle activation instructions) follows the paper.
// The three-stage split, encodings, hazard rules and instruction subset are this design's
// own; the baseline core it extends has four stages.
// The evt_* signals are one-cycle strobes (instruction retired, grant stall, load-use stall,
// SPR stall, loop-back, redirect, pl.sdotsp.h, activation) for testbenches to count
// through the hierarchy. They drive no port, so synthesis removes them and lint lists them
// as unused.
module rnn_core
  import rnn_pkg::*;
#(
  parameter logic [31:0] BOOT_ADDR = 32'h0000_0000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  output mem_req_t instr_req_o,
  input  mem_rsp_t instr_rsp_i,
  output mem_req_t data_req_o,
  input  mem_rsp_t data_rsp_i,
  output logic     halted_o,
  output logic     illegal_o
);

  // ------------------------------------------------------------------ fetch
  logic        if_valid, ex_fire, redirect;
  logic [31:0] if_instr, if_pc, redirect_pc;
  logic        hwlp_we, hwlp_jump;
  logic [31:0] hwlp_start, hwlp_end, hwlp_count;
  ctrl_t       c;

  rnn_if_stage #(.BOOT_ADDR(BOOT_ADDR), .FIFO_DEPTH(3)) i_if (
    .clk_i, .rst_ni,
    .instr_req_o, .instr_rsp_i,
    .valid_o      (if_valid),
    .instr_o      (if_instr),
    .pc_o         (if_pc),
    .ready_i      (ex_fire),
    .redirect_i   (redirect),
    .redirect_pc_i(redirect_pc),
    .hwlp_we_i    (hwlp_we),
    .hwlp_idx_i   (c.hwlp_idx),
    .hwlp_start_i (hwlp_start),
    .hwlp_end_i   (hwlp_end),
    .hwlp_count_i (hwlp_count),
    .hwlp_jump_o  (hwlp_jump)
  );

  // ------------------------------------------------------------------ decode / operands
  logic        halted_q, illegal_q;
  logic        ex_valid;
  logic [4:0]  rs1, rs2, rd;
  logic [31:0] rs1_val, rs2_val, rd_val, spr_val;
  logic [31:0] op_a, op_b, alu_res, mult_res, act_res, ex_res;
  logic        alu_cmp;

  rnn_decoder i_dec (.instr_i(if_instr), .ctrl_o(c));

  assign ex_valid = if_valid && !halted_q;
  assign rs1 = if_instr[19:15];
  assign rs2 = if_instr[24:20];
  assign rd  = if_instr[11:7];

  // register file write ports
  logic        rf_we_a, rf_we_b;
  logic [4:0]  rf_waddr_a, rf_waddr_b;
  logic [31:0] rf_wdata_a, rf_wdata_b;

  rnn_regfile #(.NREGS(32), .XLEN(32)) i_rf (
    .clk_i, .rst_ni,
    .raddr_a_i(rs1), .raddr_b_i(rs2), .raddr_c_i(rd),
    .rdata_a_o(rs1_val), .rdata_b_o(rs2_val), .rdata_c_o(rd_val),
    .we_a_i(rf_we_a), .waddr_a_i(rf_waddr_a), .wdata_a_i(rf_wdata_a),
    .we_b_i(rf_we_b), .waddr_b_i(rf_waddr_b), .wdata_b_i(rf_wdata_b)
  );

  // SPRs: written by the load write-back, read as multiplier operand A
  logic        spr_we;
  logic        spr_widx;
  logic [31:0] spr_wdata;

  rnn_sdot_spr #(.N_SPR(2)) i_spr (
    .clk_i, .rst_ni,
    .we_i(spr_we), .waddr_i(spr_widx), .wdata_i(spr_wdata),
    .raddr_i(c.spr_idx), .rdata_o(spr_val)
  );

  // ------------------------------------------------------------------ execute
  always_comb begin
    unique case (c.opa_sel)
      OPA_PC:   op_a = if_pc;
      OPA_ZERO: op_a = '0;
      default:  op_a = rs1_val;
    endcase
    op_b = c.opb_imm ? c.imm : rs2_val;
  end

  rnn_alu i_alu (.op_i(c.alu_op), .a_i(op_a), .b_i(op_b), .result_o(alu_res), .cmp_o(alu_cmp));

  rnn_dotp_mult i_mult (
    .op_i    (c.mult_op),
    .op_a_i  (c.mult_spr ? spr_val : rs1_val),   // operand A from the SPR for pl.sdotsp.h
    .op_b_i  (rs2_val),
    .op_c_i  (rd_val),
    .result_o(mult_res)
  );

  rnn_act_unit i_act (.operand_i(rs1_val), .is_sig_i(c.act_sig), .result_o(act_res));

  always_comb begin
    unique case (c.res_sel)
      RES_MULT: ex_res = mult_res;
      RES_ACT:  ex_res = act_res;
      RES_LINK: ex_res = if_pc + 32'd4;
      default:  ex_res = alu_res;
    endcase
  end

  // ------------------------------------------------------------------ LSU
  logic        lsu_req, lsu_gnt, lsu_busy, lsu_wb_valid;
  logic [31:0] lsu_addr, lsu_wb_rdata;
  lsu_tag_t    lsu_tag, lsu_pend_tag, lsu_wb_tag;

  always_comb begin
    lsu_addr = (c.mem_postinc || c.mem_to_spr) ? rs1_val : alu_res;
    lsu_tag  = '0;
    if (c.mem_to_spr) begin
      lsu_tag.rf_we   = 1'b1;
      lsu_tag.rf_addr = rs1;
      lsu_tag.spr_we  = 1'b1;
      lsu_tag.spr_idx = c.spr_idx;
      lsu_tag.incr    = rs1_val + c.imm;
    end else if (!c.mem_we) begin
      lsu_tag.rf_we   = 1'b1;
      lsu_tag.rf_addr = rd;
    end
  end

  // ------------------------------------------------------------------ hazards
  logic       stall_dep, stall_spr, stall_gnt;
  logic [4:0] ex_wdest;
  logic       ex_writes;

  always_comb begin
    ex_writes = c.rf_we;
    ex_wdest  = c.mem_postinc ? rs1 : rd;
    stall_dep = lsu_busy && lsu_pend_tag.rf_we && (lsu_pend_tag.rf_addr != 5'd0) &&
                ((c.use_rs1    && rs1 == lsu_pend_tag.rf_addr) ||
                 (c.use_rs2    && rs2 == lsu_pend_tag.rf_addr) ||
                 (c.use_rd_src && rd  == lsu_pend_tag.rf_addr) ||
                 (ex_writes    && ex_wdest == lsu_pend_tag.rf_addr) ||
                 (c.mem_req && lsu_tag.rf_we && lsu_tag.rf_addr == lsu_pend_tag.rf_addr));
    stall_spr = lsu_busy && lsu_pend_tag.spr_we && c.mult_spr && (lsu_pend_tag.spr_idx == c.spr_idx);
    lsu_req   = ex_valid && c.mem_req && !c.illegal && !stall_dep && !stall_spr;
    stall_gnt = lsu_req && !lsu_gnt;
    ex_fire   = ex_valid && !c.illegal && !c.halt && !stall_dep && !stall_spr &&
                (!c.mem_req || lsu_gnt);
  end

  rnn_lsu i_lsu (
    .clk_i, .rst_ni,
    .ex_req_i   (lsu_req),
    .ex_we_i    (c.mem_we),
    .ex_addr_i  (lsu_addr),
    .ex_wdata_i (rs2_val),
    .ex_size_i  (c.mem_size),
    .ex_signed_i(c.mem_signed),
    .ex_tag_i   (lsu_tag),
    .ex_gnt_o   (lsu_gnt),
    .busy_o     (lsu_busy),
    .pend_tag_o (lsu_pend_tag),
    .wb_valid_o (lsu_wb_valid),
    .wb_rdata_o (lsu_wb_rdata),
    .wb_tag_o   (lsu_wb_tag),
    .data_req_o,
    .data_rsp_i
  );

  // ------------------------------------------------------------------ write-back / control flow
  logic taken;

  always_comb begin
    rf_we_a    = ex_fire && ex_writes;
    rf_waddr_a = ex_wdest;
    rf_wdata_a = c.mem_postinc ? alu_res : ex_res;

    rf_we_b    = lsu_wb_valid && lsu_wb_tag.rf_we;
    rf_waddr_b = lsu_wb_tag.rf_addr;
    rf_wdata_b = lsu_wb_tag.spr_we ? lsu_wb_tag.incr : lsu_wb_rdata;

    spr_we     = lsu_wb_valid && lsu_wb_tag.spr_we;
    spr_widx   = lsu_wb_tag.spr_idx;
    spr_wdata  = lsu_wb_rdata;

    taken      = (c.branch && alu_cmp) || c.jal || c.jalr;
    hwlp_we    = ex_fire && c.hwlp_we;
    hwlp_start = if_pc + 32'd4;
    hwlp_end   = if_pc + c.hwlp_end_off;
    hwlp_count = c.hwlp_cnt_reg ? rs1_val : c.imm;
    redirect   = ex_fire && (taken || c.hwlp_we);
    if (c.hwlp_we)   redirect_pc = if_pc + 32'd4;
    else if (c.jalr) redirect_pc = {alu_res[31:1], 1'b0};
    else             redirect_pc = if_pc + c.imm;
  end

  // the jalr target uses the ALU with operand B = imm; branches compare rs1/rs2 in the ALU
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      halted_q  <= 1'b0;
      illegal_q <= 1'b0;
    end else if (ex_valid && (c.halt || c.illegal) && !lsu_busy) begin
      halted_q  <= 1'b1;
      illegal_q <= c.illegal;
    end
  end

  assign halted_o  = halted_q;
  assign illegal_o = illegal_q;

  // ------------------------------------------------------------------ event strobes
  // (observation points for simulation: one per mechanism)
  logic evt_retire, evt_stall_gnt, evt_stall_dep, evt_stall_spr, evt_hwlp_jump, evt_redirect,
        evt_pl_sdotsp, evt_act;
  assign evt_retire    = ex_fire;
  assign evt_stall_gnt = stall_gnt;
  assign evt_stall_dep = ex_valid && stall_dep;
  assign evt_stall_spr = ex_valid && stall_spr && !stall_dep;
  assign evt_hwlp_jump = hwlp_jump;
  assign evt_redirect  = redirect;
  assign evt_pl_sdotsp = ex_fire && c.mem_to_spr;
  assign evt_act       = ex_fire && (c.res_sel == RES_ACT);

endmodule
