// rnn_pkg: types and constants shared by the RNN-extended RISC-V core.
//
// Holds the opcode and function-field encodings of the supported instructions, the
// operation enums of the ALU and of the dot-product multiplier, the decoded-instruction
// struct passed from the decoder to the execute stage, the request/response structs of the
// two memory ports (req/gnt/rvalid handshake, one word per request), and the slope/offset
// tables of the piecewise-linear tanh and sigmoid unit.
//
// Activation tables. Each function is split into 32 equal intervals on the positive axis:
// tanh covers [0,4) (interval 0.125, index = |x| >> 9 in Q3.12), sigmoid covers [0,8)
// (interval 0.25, index = |x| >> 10). For interval i = [a, a+h):
//   m_i = (f(a+h) - f(a)) / h                       (secant slope, stored as m_i * 2^16)
//   q_i = (max(f(x) - m_i x) + min(f(x) - m_i x))/2 over x in [a, a+h]
//                                                   (centre of the residual band, q_i * 2^16)
// The unit returns y = (m_i*|x| + q_i*2^12 + 2^15) >> 16 in Q3.12. The largest deviation
// from the exact function over all 2^16 inputs is 8.7e-4 for tanh and 4.9e-4 for sigmoid.
package rnn_pkg;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LUI       = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC     = 7'b0010111;
  localparam logic [6:0] OPC_JAL       = 7'b1101111;
  localparam logic [6:0] OPC_JALR      = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH    = 7'b1100011;
  localparam logic [6:0] OPC_LOAD      = 7'b0000011;
  localparam logic [6:0] OPC_STORE     = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM     = 7'b0010011;
  localparam logic [6:0] OPC_OP        = 7'b0110011;
  localparam logic [6:0] OPC_FENCE     = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM    = 7'b1110011;
  localparam logic [6:0] OPC_LOAD_POST = 7'b0001011;  // p.lb/p.lh/p.lw rd, imm(rs1!)
  localparam logic [6:0] OPC_STORE_POST= 7'b0101011;  // p.s{b,h,w} rs2, imm(rs1!)
  localparam logic [6:0] OPC_HWLOOP    = 7'b1111011;  // lp.setup / lp.setupi
  localparam logic [6:0] OPC_VECOP     = 7'b1010111;  // pv.sdotsp.h, pl.sdotsp.h.N, pl.tanh, pl.sig

  // funct7 values inside OPC_VECOP (funct3 = 000)
  localparam logic [6:0] F7_PV_SDOTSP_H = 7'b1011100;  // rd += rs1.h1*rs2.h1 + rs1.h0*rs2.h0
  localparam logic [6:0] F7_PL_SDOTSP_0 = 7'b1011101;  // rd += SPR0.(h1,h0)*rs2; SPR0 <= mem[rs1]; rs1 += 4
  localparam logic [6:0] F7_PL_SDOTSP_1 = 7'b1011111;  // same with SPR1
  localparam logic [6:0] F7_PL_TANH     = 7'b0111100;  // rd = tanh(rs1), rs2 field = 0
  localparam logic [6:0] F7_PL_SIG      = 7'b0111101;  // rd = sig(rs1),  rs2 field = 0
  // funct7 of p.mac inside OPC_OP (funct3 = 000): rd += rs1 * rs2
  localparam logic [6:0] F7_P_MAC       = 7'b0100001;
  localparam logic [6:0] F7_MULDIV      = 7'b0000001;

  // funct3 of OPC_HWLOOP
  localparam logic [2:0] F3_LP_SETUP  = 3'b100;  // count = rs1, end = pc + (imm[11:0] << 2)
  localparam logic [2:0] F3_LP_SETUPI = 3'b101;  // count = imm[11:0], end = pc + (rs1-field << 2)

  // ---------------------------------------------------------------- enums
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SRL, ALU_SRA, ALU_XOR, ALU_OR, ALU_AND,
    ALU_EQ, ALU_NE, ALU_LT, ALU_GE, ALU_LTU, ALU_GEU
  } alu_op_e;

  typedef enum logic [2:0] {
    MUL_MUL, MUL_MULH, MUL_MULHSU, MUL_MULHU, MUL_MAC, MUL_SDOTSP
  } mult_op_e;

  typedef enum logic [1:0] { OPA_REG, OPA_PC, OPA_ZERO } opa_sel_e;
  typedef enum logic [1:0] { RES_ALU, RES_MULT, RES_ACT, RES_LINK } res_sel_e;
  typedef enum logic [1:0] { SIZE_B = 2'b00, SIZE_H = 2'b01, SIZE_W = 2'b10 } mem_size_e;

  // ---------------------------------------------------------------- decoded instruction
  typedef struct packed {
    logic        illegal;
    logic        halt;          // ecall / ebreak: stop the core
    logic        use_rs1;
    logic        use_rs2;
    logic        use_rd_src;    // rd is read as accumulator (p.mac, pv.sdotsp.h, pl.sdotsp.h)
    opa_sel_e    opa_sel;
    logic        opb_imm;       // ALU operand B from immediate
    alu_op_e     alu_op;
    mult_op_e    mult_op;
    logic        mult_spr;      // operand A of the multiplier from SPR[spr_idx]
    logic        act_sig;       // 1 = pl.sig, 0 = pl.tanh
    res_sel_e    res_sel;
    logic        rf_we;         // EX writes rd
    logic [31:0] imm;
    logic        branch;
    logic        jal;
    logic        jalr;
    logic        mem_req;
    logic        mem_we;
    mem_size_e   mem_size;
    logic        mem_signed;
    logic        mem_postinc;   // address = rs1, EX writes rs1 <= rs1 + imm
    logic        mem_to_spr;    // pl.sdotsp.h: loaded word goes to SPR[spr_idx], rs1 <= rs1 + 4 at write-back
    logic        spr_idx;
    logic        hwlp_we;
    logic        hwlp_idx;
    logic        hwlp_cnt_reg;  // lp.setup: count from rs1
    logic [31:0] hwlp_end_off;  // loop end = pc + hwlp_end_off (address of the last body instruction)
  } ctrl_t;

  // ---------------------------------------------------------------- memory port
  typedef struct packed {
    logic        req;
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // what the load write-back does with a response (travels with the request through the LSU)
  typedef struct packed {
    logic        rf_we;      // write a GPR through write port B
    logic [4:0]  rf_addr;
    logic        spr_we;     // pl.sdotsp.h: loaded word goes to SPR[spr_idx] ...
    logic        spr_idx;
    logic [31:0] incr;       // ... and GPR rf_addr (= rs1) receives this incremented address
  } lsu_tag_t;

  // ---------------------------------------------------------------- activation tables
  localparam int unsigned ACT_INTERVALS = 32;
  localparam logic [15:0] TANH_M [32] = '{16'd65197, 16'd63211, 16'd59475, 16'd54400, 16'd48487, 16'd42231, 16'd36048, 16'd30245, 16'd25012, 16'd20438, 16'd16538, 16'd13276, 16'd10590, 16'd8404, 16'd6643, 16'd5234, 16'd4113, 16'd3226, 16'd2526, 16'd1976, 16'd1544, 16'd1206, 16'd941, 16'd734, 16'd572, 16'd446, 16'd348, 16'd271, 16'd211, 16'd165, 16'd128, 16'd100};
  localparam logic signed [17:0] TANH_Q [32] = '{18'sd8, 18'sd271, 18'sd1217, 18'sd3129, 18'sd6090, 18'sd10001, 18'sd14636, 18'sd19710, 18'sd24938, 18'sd30079, 18'sd34949, 18'sd39429, 18'sd43454, 18'sd47002, 18'sd50082, 18'sd52721, 18'sd54960, 18'sd56843, 18'sd58416, 18'sd59722, 18'sd60801, 18'sd61689, 18'sd62416, 18'sd63011, 18'sd63496, 18'sd63890, 18'sd64210, 18'sd64469, 18'sd64678, 18'sd64847, 18'sd64983, 18'sd65093};
  localparam logic [15:0] SIG_M [32] = '{16'd16299, 16'd15803, 16'd14869, 16'd13600, 16'd12122, 16'd10558, 16'd9012, 16'd7561, 16'd6253, 16'd5110, 16'd4134, 16'd3319, 16'd2647, 16'd2101, 16'd1661, 16'd1308, 16'd1028, 16'd807, 16'd632, 16'd494, 16'd386, 16'd301, 16'd235, 16'd184, 16'd143, 16'd112, 16'd87, 16'd68, 16'd53, 16'd41, 16'd32, 16'd25};
  localparam logic signed [17:0] SIG_Q [32] = '{18'sd32772, 18'sd32904, 18'sd33377, 18'sd34332, 18'sd35813, 18'sd37769, 18'sd40086, 18'sd42623, 18'sd45237, 18'sd47807, 18'sd50242, 18'sd52483, 18'sd54495, 18'sd56269, 18'sd57809, 18'sd59129, 18'sd60248, 18'sd61190, 18'sd61976, 18'sd62629, 18'sd63169, 18'sd63612, 18'sd63976, 18'sd64274, 18'sd64516, 18'sd64713, 18'sd64873, 18'sd65002, 18'sd65107, 18'sd65191, 18'sd65260, 18'sd65314};

endpackage
