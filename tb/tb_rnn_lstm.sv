// tb_rnn_lstm: an LSTM layer running on the core, several time steps.
//
// The program, assembled here, computes one LSTM step on Q3.12 data:
//   z   = W [x_t; h_{t-1}] + b                  4*NH rows (gates i, f, g, o), NX+NH columns
//   i = sig(z_i), f = sig(z_f), g = tanh(z_g), o = sig(z_o)
//   c_t = f*c_{t-1} + i*g,  h_t = o*tanh(c_t)
// Phase 1 is the matrix-vector product, in output tiles of four rows: the accumulators start
// at the bias, the weights stream through the SPRs with pl.sdotsp.h.0/.1 in a 5-instruction
// hardware loop, and the sums are shifted back to Q3.12 and stored. Phase 2 is a 19-
// instruction loop (lp.setup with the count in a register) over the NH cells with pl.sig,
// pl.tanh, mul and shifts. It stores c_t and writes h_t back into the input vector for the
// next step. The testbench writes x_t, resets the core and lets it run to ebreak for every
// step; the first steps use ideal memories, the later ones memories with random grant
// delays and latency.
// Checks per step: every pre-activation z exactly (integer arithmetic), every c_t and h_t
// against real-valued sigmoid/tanh evaluated on the core's previous state (tolerance 6e-3),
// the number of pl.sdotsp.h, activation instructions and loop-backs, and the inner-loop
// cycle count with ideal memories (6 cycles per 8 MACs). It also counts a failure for a
// mechanism that never occurred (grant stall, load-use stall, loop-back, pl.sdotsp.h,
// activation). Layer size NX = NH = 32 is this testbench's choice.
module tb_rnn_lstm;
  import rnn_pkg::*;
  import tb_rv_asm_pkg::*;

  localparam int NX = 32, NH = 32, CIN = NX + NH, NROW = 4 * NH, STEPS = 4;
  localparam int V_ADDR = 32'h1000, W_ADDR = 32'h2000, B_ADDR = 32'h7000;
  localparam int Z_ADDR = 32'h8000, C_ADDR = 32'h9000;

  logic clk = 0, rst_n = 0;
  mem_req_t ireq, dreq;
  mem_rsp_t irsp, drsp;
  logic halted, illegal;
  int checks = 0, failures = 0;

  rnn_core dut (.clk_i(clk), .rst_ni(rst_n), .instr_req_o(ireq), .instr_rsp_i(irsp),
                .data_req_o(dreq), .data_rsp_i(drsp), .halted_o(halted), .illegal_o(illegal));
  tb_mem_model #(.WORDS(1024))  imem (.clk_i(clk), .rst_ni(rst_n), .req_i(ireq), .rsp_o(irsp));
  tb_mem_model #(.WORDS(16384)) dmem (.clk_i(clk), .rst_ni(rst_n), .req_i(dreq), .rsp_o(drsp));

  always #5 clk = ~clk;

  // ------------------------------------------------------------------ program
  int pc, loop_start, loop_after;
  task automatic emit(logic [31:0] w); imem.mem[pc/4] = w; pc += 4; endtask
  task automatic li(reg_t rd, int v);
    int lo = (v << 20) >>> 20;
    emit(lui(rd, (v - lo) >>> 12));
    emit(addi(rd, rd, lo));
  endtask

  task automatic build_program();
    int tile;
    pc = 0;
    // phase 1: z = W v + b, tiles of 4 rows
    li(2, V_ADDR); li(17, W_ADDR); li(18, B_ADDR); li(13, Z_ADDR);
    li(14, CIN * 2); emit(slli(16, 14, 2)); li(1, NROW / 4);
    tile = pc;
    emit(addi(3, 2, 0));
    for (int r = 8; r <= 11; r++) emit(p_lw(r, 4, 18));     // bias, already in Q6.24
    emit(addi(4, 17, 0)); emit(add(5, 4, 14)); emit(add(6, 5, 14)); emit(add(7, 6, 14));
    emit(pl_sdotsp_h(0, 0, 4, 0));
    emit(pl_sdotsp_h(1, 0, 5, 0));
    emit(lp_setupi(0, CIN / 2, 5));
    loop_start = pc;
    emit(p_lw(12, 4, 3));
    emit(pl_sdotsp_h(0, 8, 6, 12));
    emit(pl_sdotsp_h(1, 9, 7, 12));
    emit(pl_sdotsp_h(0, 10, 4, 12));
    emit(pl_sdotsp_h(1, 11, 5, 12));
    loop_after = pc;
    for (int r = 8; r <= 11; r++) emit(srai(r, r, 12));
    for (int r = 8; r <= 11; r++) emit(p_sw(r, 4, 13));
    emit(add(17, 17, 16));
    emit(addi(1, 1, -1));
    emit(bne(1, 0, tile - pc));
    // phase 2: the cells
    li(20, Z_ADDR); li(21, Z_ADDR + 4 * NH); li(22, Z_ADDR + 8 * NH); li(23, Z_ADDR + 12 * NH);
    li(24, C_ADDR); li(25, V_ADDR + 2 * NX); li(28, NH);
    emit(lp_setup(1, 28, 19));
    emit(p_lw(26, 4, 20));  emit(pl_sig(26, 26));        // i
    emit(p_lw(27, 4, 21));  emit(pl_sig(27, 27));        // f
    emit(p_lw(29, 4, 22));  emit(pl_tanh(29, 29));       // g
    emit(mul(29, 26, 29));                               // i*g
    emit(lw(30, 0, 24));
    emit(mul(30, 27, 30));                               // f*c
    emit(add(30, 30, 29));
    emit(srai(30, 30, 12));                              // c_t
    emit(p_sw(30, 4, 24));
    emit(pl_tanh(31, 30));
    emit(p_lw(26, 4, 23));  emit(pl_sig(26, 26));        // o
    emit(mul(31, 26, 31));
    emit(srai(31, 31, 12));                              // h_t
    emit(sh(31, 0, 25));
    emit(addi(25, 25, 2));
    emit(ebreak());
  endtask

  // ------------------------------------------------------------------ data and reference
  logic signed [15:0] w [NROW][CIN];
  int b [NROW];
  logic signed [15:0] v [CIN];       // [x_t; h_{t-1}] as the core sees it
  int c_prev [NH];

  function automatic real q(int x); return real'(x) / 4096.0; endfunction
  function automatic real sig(real x); return 1.0 / (1.0 + $exp(-x)); endfunction

  task automatic expect_eq(string what, int idx, logic [31:0] got, logic [31:0] expct);
    checks++;
    if (got !== expct) begin
      failures++;
      if (failures < 10) $display("FAIL %s[%0d] = %h, expected %h", what, idx, got, expct);
    end
  endtask
  real max_err_c, max_err_h;
  task automatic expect_near(string what, int idx, real got, real expct);
    real e = (got > expct) ? got - expct : expct - got;
    checks++;
    if (what == "c" && e > max_err_c) max_err_c = e;
    if (what == "h" && e > max_err_h) max_err_h = e;
    if (e > 6.0e-3) begin
      failures++;
      if (failures < 10) $display("FAIL %s[%0d] = %f, expected %f", what, idx, got, expct);
    end
  endtask

  task automatic init_data();
    for (int r = 0; r < NROW; r++) begin
      for (int k = 0; k < CIN; k++) w[r][k] = 16'($signed($urandom() % 801) - 400);   // +-0.1
      b[r] = $signed($urandom() % 2049) - 1024;                                         // +-0.25
      dmem.mem[B_ADDR / 4 + r] = 32'(b[r] <<< 12);
      for (int k = 0; k < CIN / 2; k++)
        dmem.mem[(W_ADDR + r * CIN * 2) / 4 + k] = {w[r][2*k+1], w[r][2*k]};
    end
    for (int k = 0; k < CIN / 2; k++) dmem.mem[V_ADDR / 4 + k] = '0;
    for (int j = 0; j < NH; j++) dmem.mem[C_ADDR / 4 + j] = '0;
  endtask

  // write x_t into the first NX entries of v; h_{t-1} is already there
  task automatic write_input();
    for (int k = 0; k < NX / 2; k++) begin
      logic signed [15:0] x0, x1;
      x0 = 16'($signed($urandom() % 8193) - 4096);
      x1 = 16'($signed($urandom() % 8193) - 4096);
      dmem.mem[V_ADDR / 4 + k] = {x1, x0};
    end
    for (int k = 0; k < CIN / 2; k++) {v[2*k+1], v[2*k]} = dmem.mem[V_ADDR / 4 + k];
    for (int j = 0; j < NH; j++) c_prev[j] = int'($signed(dmem.mem[C_ADDR / 4 + j]));
  endtask

  task automatic check_step(int t);
    int z [NROW];
    for (int r = 0; r < NROW; r++) begin
      longint acc = longint'(b[r]) <<< 12;
      for (int k = 0; k < CIN; k++) acc += longint'(v[k]) * longint'(w[r][k]);
      z[r] = int'(acc >>> 12);
      expect_eq("z", r, dmem.mem[Z_ADDR / 4 + r], 32'(z[r]));
    end
    for (int j = 0; j < NH; j++) begin
      real gi, gf, gg, go, c, h;
      logic [31:0] hw;
      gi = sig(q(z[j])); gf = sig(q(z[NH + j])); gg = $tanh(q(z[2*NH + j])); go = sig(q(z[3*NH + j]));
      c = gf * q(c_prev[j]) + gi * gg;
      h = go * $tanh(c);
      expect_near("c", j, q(int'($signed(dmem.mem[C_ADDR / 4 + j]))), c);
      hw = dmem.mem[(V_ADDR + 2 * NX + 2 * j) / 4];
      expect_near("h", j, q(int'($signed(j % 2 ? hw[31:16] : hw[15:0]))), h);
    end
  endtask

  // ------------------------------------------------------------------ monitors
  int cyc, t_loop, in_loop, ideal;
  int n_gnt_stall, n_dep_stall, n_hwlp, n_pl_sdot, n_act;
  int s_pl_sdot, s_act, s_hwlp;
  always @(posedge clk) if (rst_n && !halted) begin
    cyc++;
    n_gnt_stall += int'(dut.evt_stall_gnt);
    n_dep_stall += int'(dut.evt_stall_dep);
    n_hwlp      += int'(dut.evt_hwlp_jump);
    n_pl_sdot   += int'(dut.evt_pl_sdotsp);
    n_act       += int'(dut.evt_act);
    if (dut.evt_retire && ideal != 0) begin
      if (dut.if_pc == loop_start && !in_loop) begin in_loop = 1; t_loop = cyc; end
      if (dut.if_pc == loop_after && in_loop) begin
        in_loop = 0;
        checks++;
        if (cyc - t_loop != 6 * CIN / 2) begin
          failures++;
          if (failures < 10) $display("FAIL inner loop took %0d cycles, expected %0d", cyc - t_loop, 6 * CIN / 2);
        end
      end
    end
  end

  initial begin
    build_program();
    init_data();
    max_err_c = 0; max_err_h = 0;
    for (int t = 0; t < STEPS; t++) begin
      ideal = (t < STEPS / 2);
      imem.gnt_pct = ideal ? 100 : 70; imem.max_lat = ideal ? 0 : 2;
      dmem.gnt_pct = ideal ? 100 : 60; dmem.max_lat = ideal ? 0 : 2;
      write_input();
      s_pl_sdot = n_pl_sdot; s_act = n_act; s_hwlp = n_hwlp;
      cyc = 0; in_loop = 0;
      rst_n = 0;
      repeat (3) @(posedge clk);
      @(negedge clk) rst_n = 1;
      wait (halted);
      @(negedge clk);
      checks++;
      if (illegal) begin failures++; $display("FAIL illegal instruction at step %0d", t); end
      check_step(t);
      expect_eq("pl.sdotsp.h count", t, n_pl_sdot - s_pl_sdot, (NROW / 4) * (2 + 4 * CIN / 2));
      expect_eq("activation count", t, n_act - s_act, 5 * NH);
      expect_eq("loop-back count", t, n_hwlp - s_hwlp, (NROW / 4) * (CIN / 2 - 1) + NH - 1);
      $display("step %0d, %0s memories: %0d cycles, %0d MACs", t, ideal ? "ideal" : "random",
               cyc, NROW * CIN);
    end
    checks++; if (n_gnt_stall == 0) begin failures++; $display("FAIL no grant stall"); end
    checks++; if (n_dep_stall == 0) begin failures++; $display("FAIL no load-use stall"); end
    checks++; if (n_hwlp == 0)      begin failures++; $display("FAIL no loop-back"); end
    checks++; if (n_pl_sdot == 0)   begin failures++; $display("FAIL no pl.sdotsp.h"); end
    checks++; if (n_act == 0)       begin failures++; $display("FAIL no activation"); end
    $display("max error: c %f, h %f", max_err_c, max_err_h);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
