// tb_rnn_core: end-to-end test of the core, run twice: with ideal memories (grant always,
// response in the next cycle), then with memories that withhold grants at random and
// answer late.
//
// The program, assembled in the testbench, computes a fully-connected layer o = (W x) >> 12
// on Q3.12 data (CIN inputs, COUT outputs) in two ways:
//   kernel A  output tiles of 4 with pl.sdotsp.h.0/.1 (weights streamed into the SPRs) and
//             a 5-instruction hardware loop: p.lw of two inputs, four pl.sdotsp.h
//   kernel B  the same tiling with p.lw of inputs and weights and pv.sdotsp.h, a
//             9-instruction hardware loop
//   kernel D  as A with two input words per iteration (input-feature-map tiling): a
//             10-instruction loop of two p.lw and eight pl.sdotsp.h
// Then kernel C applies pl.tanh and pl.sig to every output of A in a loop set up with
// lp.setup. A last section tests base instructions (lui, mul, mulh, p.mac, sh/lh, lbu, jal,
// slt) and back-to-back pl.sdotsp.h.0 on the same SPR.
// Checks: every output of A and B against the reference computed here, tanh/sig outputs
// against the exact functions (tolerance 1e-3), the base-instruction results, the exact
// cycle count per inner-loop iteration with ideal memories (A: 6 = 5 + one load-use
// bubble, B: 9, C: 6, D: 10 with no bubble), and that every mechanism occurred: grant stall, load-use stall,
// SPR stall, hardware-loop jump, taken branch, pl.sdotsp.h and activation instructions.
module tb_rnn_core;
  import rnn_pkg::*;
  import tb_rv_asm_pkg::*;

  localparam int CIN  = 128;   // inputs  (multiple of 2)
  localparam int COUT = 64;    // outputs (multiple of 4)
  localparam int X_ADDR = 32'h1000, W_ADDR = 32'h2000;
  localparam int O1 = 32'h8000, O2 = 32'h8400, O3 = 32'h8800, O4 = 32'h8c00, MISC = 32'h9000, O5 = 32'h9400;

  logic clk = 0, rst_n = 0;
  mem_req_t ireq, dreq;
  mem_rsp_t irsp, drsp;
  logic halted, illegal;
  int checks = 0, failures = 0;

  rnn_core dut (.clk_i(clk), .rst_ni(rst_n), .instr_req_o(ireq), .instr_rsp_i(irsp),
                .data_req_o(dreq), .data_rsp_i(drsp), .halted_o(halted), .illegal_o(illegal));
  tb_mem_model #(.WORDS(4096))  imem (.clk_i(clk), .rst_ni(rst_n), .req_i(ireq), .rsp_o(irsp));
  tb_mem_model #(.WORDS(16384)) dmem (.clk_i(clk), .rst_ni(rst_n), .req_i(dreq), .rsp_o(drsp));

  always #5 clk = ~clk;

  // ------------------------------------------------------------------ program
  int pc;
  int loopa_start, loopa_after, loopb_start, loopb_after, loopc_start, loopc_after, loopd_start, loopd_after;
  task automatic emit(logic [31:0] w); imem.mem[pc/4] = w; pc += 4; endtask
  task automatic li(reg_t rd, int v);
    int lo = (v << 20) >>> 20;           // sign-extended low 12 bits
    emit(lui(rd, (v - lo) >>> 12));
    emit(addi(rd, rd, lo));
  endtask

  task automatic build_program();
    int tile;
    pc = 0;
    // ---- kernel A: pl.sdotsp.h
    li(2, X_ADDR); li(17, W_ADDR); li(14, CIN * 2); emit(slli(16, 14, 2));
    li(13, O1); li(1, COUT / 4);
    tile = pc;
    emit(addi(3, 2, 0));
    for (int r = 8; r <= 11; r++) emit(addi(r, 0, 0));
    emit(addi(4, 17, 0)); emit(add(5, 4, 14)); emit(add(6, 5, 14)); emit(add(7, 6, 14));
    emit(pl_sdotsp_h(0, 0, 4, 0));                 // preload SPR0 with row 0
    emit(pl_sdotsp_h(1, 0, 5, 0));                 // preload SPR1 with row 1
    emit(lp_setupi(0, CIN / 2, 5));
    loopa_start = pc;
    emit(p_lw(12, 4, 3));
    emit(pl_sdotsp_h(0, 8, 6, 12));
    emit(pl_sdotsp_h(1, 9, 7, 12));
    emit(pl_sdotsp_h(0, 10, 4, 12));
    emit(pl_sdotsp_h(1, 11, 5, 12));
    loopa_after = pc;
    for (int r = 8; r <= 11; r++) emit(srai(r, r, 12));
    for (int r = 8; r <= 11; r++) emit(p_sw(r, 4, 13));
    emit(add(17, 17, 16));
    emit(addi(1, 1, -1));
    emit(bne(1, 0, tile - pc));
    // ---- kernel B: p.lw + pv.sdotsp.h
    li(13, O2); li(17, W_ADDR); li(1, COUT / 4);
    tile = pc;
    emit(addi(3, 2, 0));
    for (int r = 8; r <= 11; r++) emit(addi(r, 0, 0));
    emit(addi(4, 17, 0)); emit(add(5, 4, 14)); emit(add(6, 5, 14)); emit(add(7, 6, 14));
    emit(lp_setupi(0, CIN / 2, 9));
    loopb_start = pc;
    emit(p_lw(12, 4, 3));
    emit(p_lw(18, 4, 4)); emit(p_lw(19, 4, 5)); emit(p_lw(20, 4, 6)); emit(p_lw(21, 4, 7));
    emit(pv_sdotsp_h(8, 18, 12)); emit(pv_sdotsp_h(9, 19, 12));
    emit(pv_sdotsp_h(10, 20, 12)); emit(pv_sdotsp_h(11, 21, 12));
    loopb_after = pc;
    for (int r = 8; r <= 11; r++) emit(srai(r, r, 12));
    for (int r = 8; r <= 11; r++) emit(p_sw(r, 4, 13));
    emit(add(17, 17, 16));
    emit(addi(1, 1, -1));
    emit(bne(1, 0, tile - pc));
    // ---- kernel D: as A, with two input words per iteration (input-FM tiling)
    li(13, O5); li(17, W_ADDR); li(1, COUT / 4);
    tile = pc;
    emit(addi(3, 2, 0));
    for (int r = 8; r <= 11; r++) emit(addi(r, 0, 0));
    emit(addi(4, 17, 0)); emit(add(5, 4, 14)); emit(add(6, 5, 14)); emit(add(7, 6, 14));
    emit(pl_sdotsp_h(0, 0, 4, 0));
    emit(pl_sdotsp_h(1, 0, 5, 0));
    emit(lp_setupi(0, CIN / 4, 10));
    loopd_start = pc;
    emit(p_lw(12, 4, 3));
    emit(p_lw(15, 4, 3));
    for (int h = 0; h < 2; h++) begin
      emit(pl_sdotsp_h(0, 8, 6, h ? 15 : 12));
      emit(pl_sdotsp_h(1, 9, 7, h ? 15 : 12));
      emit(pl_sdotsp_h(0, 10, 4, h ? 15 : 12));
      emit(pl_sdotsp_h(1, 11, 5, h ? 15 : 12));
    end
    loopd_after = pc;
    for (int r = 8; r <= 11; r++) emit(srai(r, r, 12));
    for (int r = 8; r <= 11; r++) emit(p_sw(r, 4, 13));
    emit(add(17, 17, 16));
    emit(addi(1, 1, -1));
    emit(bne(1, 0, tile - pc));
    // ---- kernel C: activations, loop level 1 with count from a register
    li(23, O1); li(25, O3); li(27, O4); li(28, COUT);
    emit(lp_setup(1, 28, 5));
    loopc_start = pc;
    emit(p_lw(22, 4, 23));
    emit(pl_tanh(24, 22));
    emit(p_sw(24, 4, 25));
    emit(pl_sig(26, 22));
    emit(p_sw(26, 4, 27));
    loopc_after = pc;
    // ---- base instructions
    li(29, MISC);
    li(28, 32'h1234_5678); emit(sw(28, 0, 29));
    emit(mul(30, 28, 28));   emit(sw(30, 4, 29));
    emit(mulh(30, 28, 28));  emit(sw(30, 8, 29));
    li(31, -7); emit(addi(30, 0, 100)); emit(p_mac(30, 31, 28)); emit(sw(30, 12, 29));
    emit(sh(31, 16, 29)); emit(lh(30, 16, 29)); emit(sw(30, 20, 29));
    emit(lbu(30, 0, 29)); emit(sw(30, 24, 29));
    emit(jal(1, 8)); emit(addi(30, 0, 1)); emit(sw(1, 28, 29));
    emit(slt(30, 31, 0)); emit(sw(30, 32, 29));
    // back-to-back pl.sdotsp.h.0: the second waits for the first one's SPR load
    li(4, X_ADDR); li(5, X_ADDR + 4);
    emit(pl_sdotsp_h(0, 0, 4, 0));
    emit(pl_sdotsp_h(0, 0, 5, 0));
    li(15, 32'h0001_0001); emit(addi(10, 0, 0));
    emit(pl_sdotsp_h(0, 10, 4, 15));
    emit(sw(10, 36, 29)); emit(sw(4, 40, 29));
    emit(ebreak());
  endtask

  // ------------------------------------------------------------------ data and reference
  logic signed [15:0] xv [CIN];
  logic signed [15:0] wv [COUT][CIN];
  logic [31:0] ref_o [COUT];

  task automatic load_data();
    for (int i = 0; i < CIN; i++) xv[i] = 16'($signed($urandom() % 8193) - 4096);         // [-1, 1]
    for (int o = 0; o < COUT; o++)
      for (int i = 0; i < CIN; i++) wv[o][i] = 16'($signed($urandom() % 2049) - 1024);  // [-0.25, 0.25]
    for (int i = 0; i < CIN / 2; i++) dmem.mem[X_ADDR / 4 + i] = {xv[2*i+1], xv[2*i]};
    for (int o = 0; o < COUT; o++)
      for (int i = 0; i < CIN / 2; i++) dmem.mem[(W_ADDR + o * CIN * 2) / 4 + i] = {wv[o][2*i+1], wv[o][2*i]};
    for (int o = 0; o < COUT; o++) begin
      longint acc = 0;
      for (int i = 0; i < CIN; i++) acc += longint'(xv[i]) * longint'(wv[o][i]);
      ref_o[o] = 32'(acc >>> 12);
    end
    for (int a = O1 / 4; a < (O5 + 4 * COUT) / 4; a++) dmem.mem[a] = 32'hcccc_cccc;
  endtask

  // ------------------------------------------------------------------ monitors
  int cyc, t_a, t_b, t_c, t_d, in_a, in_b, in_c, in_d, ideal;
  int n_gnt_stall, n_dep_stall, n_spr_stall, n_hwlp, n_branch, n_pl_sdot, n_act, n_retired;
  always @(posedge clk) if (rst_n && !halted) begin
    cyc++;
    n_gnt_stall += int'(dut.evt_stall_gnt);
    n_dep_stall += int'(dut.evt_stall_dep);
    n_spr_stall += int'(dut.evt_stall_spr);
    n_hwlp      += int'(dut.evt_hwlp_jump);
    n_branch    += int'(dut.evt_redirect && dut.c.branch);
    n_pl_sdot   += int'(dut.evt_pl_sdotsp);
    n_act       += int'(dut.evt_act);
    n_retired   += int'(dut.evt_retire);
    if (dut.evt_retire && ideal != 0) begin
      if (dut.if_pc == loopa_start && !in_a) begin in_a = 1; t_a = cyc; end
      if (dut.if_pc == loopa_after) begin in_a = 0; check_cycles("A", cyc - t_a, 6 * CIN / 2); end
      if (dut.if_pc == loopb_start && !in_b) begin in_b = 1; t_b = cyc; end
      if (dut.if_pc == loopb_after) begin in_b = 0; check_cycles("B", cyc - t_b, 9 * CIN / 2); end
      if (dut.if_pc == loopd_start && !in_d) begin in_d = 1; t_d = cyc; end
      if (dut.if_pc == loopd_after) begin in_d = 0; check_cycles("D", cyc - t_d, 10 * CIN / 4); end
      if (dut.if_pc == loopc_start && !in_c) begin in_c = 1; t_c = cyc; end
      if (dut.if_pc == loopc_after) begin in_c = 0; check_cycles("C", cyc - t_c, 6 * COUT); end
    end
  end

  function automatic void check_cycles(string k, int got, int expct);
    checks++;
    if (got != expct) begin
      failures++;
      $display("FAIL kernel %s inner loop took %0d cycles, expected %0d", k, got, expct);
    end
  endfunction

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] expct);
    checks++;
    if (got !== expct) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %h expected %h", what, got, expct);
    end
  endtask

  function automatic real f_act(real x, bit sig);
    return sig ? 1.0 / (1.0 + $exp(-x)) : $tanh(x);
  endfunction

  task automatic check_results();
    for (int o = 0; o < COUT; o++) begin
      expect_eq($sformatf("kernel A out %0d", o), dmem.mem[O1 / 4 + o], ref_o[o]);
      expect_eq($sformatf("kernel B out %0d", o), dmem.mem[O2 / 4 + o], ref_o[o]);
      expect_eq($sformatf("kernel D out %0d", o), dmem.mem[O5 / 4 + o], ref_o[o]);
      for (int s = 0; s < 2; s++) begin
        logic [31:0] got = dmem.mem[(s ? O4 : O3) / 4 + o];
        real x = real'($signed(ref_o[o][15:0])) / 4096.0;
        real y = real'($signed(got[15:0])) / 4096.0;
        real e = y - f_act(x, s[0]);
        real tol = 1.0e-3;
        if (s == 0 && (x >= 4.0 || x <= -4.0)) tol = 1.0e-3;
        checks++;
        if (e > tol || e < -tol || got[31:16] != {16{got[15]}}) begin
          failures++;
          $display("FAIL %s(%f) = %f", s ? "sig" : "tanh", x, y);
        end
      end
    end
    expect_eq("lui/addi", dmem.mem[MISC / 4], 32'h1234_5678);
    expect_eq("mul",  dmem.mem[MISC / 4 + 1], 32'(longint'(32'h1234_5678) * longint'(32'h1234_5678)));
    expect_eq("mulh", dmem.mem[MISC / 4 + 2], 32'((longint'(32'h1234_5678) * longint'(32'h1234_5678)) >>> 32));
    expect_eq("p.mac", dmem.mem[MISC / 4 + 3], 32'(100 - 7 * 32'h1234_5678));
    expect_eq("sh/lh", dmem.mem[MISC / 4 + 5], 32'hffff_fff9);
    expect_eq("lbu", dmem.mem[MISC / 4 + 6], 32'h78);
    expect_eq("jal link", dmem.mem[MISC / 4 + 7] & 32'h3, 0);
    expect_eq("jal skipped", imem.mem[dmem.mem[MISC / 4 + 7] / 4 - 1], jal(1, 8));
    expect_eq("slt", dmem.mem[MISC / 4 + 8], 1);
    expect_eq("SPR back-to-back", dmem.mem[MISC / 4 + 9],
              32'(int'(xv[3]) + int'(xv[2])));
    expect_eq("pl.sdotsp address increment", dmem.mem[MISC / 4 + 10], X_ADDR + 8);
  endtask

  task automatic run(string name);
    cyc = 0; in_a = 0; in_b = 0; in_c = 0; in_d = 0;
    n_gnt_stall = 0; n_dep_stall = 0; n_spr_stall = 0; n_hwlp = 0; n_branch = 0;
    n_pl_sdot = 0; n_act = 0; n_retired = 0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (halted);
    repeat (2) @(negedge clk);
    checks++;
    if (illegal) begin failures++; $display("FAIL core stopped on an illegal instruction"); end
    check_results();
    $display("%s: %0d cycles, %0d instructions, grant stalls %0d, load-use stalls %0d, SPR stalls %0d, loop jumps %0d, taken branches %0d, pl.sdotsp.h %0d, pl.tanh/sig %0d",
             name, cyc, n_retired, n_gnt_stall, n_dep_stall, n_spr_stall, n_hwlp, n_branch, n_pl_sdot, n_act);
    expect_eq("pl.sdotsp.h count", n_pl_sdot, 2 * (COUT / 4) * (2 + 4 * CIN / 2) + 3);
    expect_eq("activation count", n_act, 2 * COUT);
    expect_eq("loop jumps", n_hwlp, 2 * (COUT / 4) * (CIN / 2 - 1) + (COUT / 4) * (CIN / 4 - 1) + (COUT - 1));
    checks++; if (n_dep_stall == 0) begin failures++; $display("FAIL no load-use stall"); end
    checks++; if (n_spr_stall == 0) begin failures++; $display("FAIL no SPR stall"); end
    checks++; if (n_branch == 0)    begin failures++; $display("FAIL no taken branch"); end
  endtask

  initial begin
    build_program();
    load_data();
    ideal = 1;
    run("ideal memories");
    checks++;
    if (n_gnt_stall != 0) begin failures++; $display("FAIL grant stall with an always-granting memory"); end
    // second run: random grants and latency on both ports
    ideal = 0;
    load_data();
    imem.gnt_pct = 70; imem.max_lat = 2;
    dmem.gnt_pct = 60; dmem.max_lat = 2;
    run("random memories");
    checks++; if (n_gnt_stall == 0) begin failures++; $display("FAIL no grant stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
