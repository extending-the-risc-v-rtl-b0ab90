// tb_rnn_hwloop: drives the loop controller with a simple fetch model (next pc = pc+4 or
// the loop start on jump_o) and counts how often each body instruction is fetched.
// Cases: single loops of several lengths and counts (including a one-instruction body and
// count 1), fetch bubbles (fetch_fire low) in the middle of a loop, and a two-level nest
// whose inner loop is set up again on every outer iteration. Last, 200 random two-level
// nests (random bounds, counts 1..6, inner and outer loops that may end on the same
// instruction, random fetch bubbles); every address's fetch count is compared with the
// count worked out from the loop bounds.
module tb_rnn_hwloop;
  logic clk = 0, rst_n = 0;
  logic we, idx, fire, jump;
  logic [31:0] start, lend, count, pc, target, nxt;
  int checks = 0, failures = 0;
  int visits [logic [31:0]];

  rnn_hwloop #(.N_LOOPS(2)) dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .idx_i(idx),
    .start_i(start), .end_i(lend), .count_i(count), .fetch_fire_i(fire), .fetch_pc_i(pc),
    .jump_o(jump), .target_o(target));
  always #5 clk = ~clk;

  task automatic setup(logic l, logic [31:0] s, logic [31:0] e, logic [31:0] n);
    @(negedge clk); we = 1; idx = l; start = s; lend = e; count = n; fire = 0;
    @(negedge clk); we = 0;
  endtask

  // fetch from pc0 until pc reaches stop_pc; returns the number of fetches
  task automatic run(logic [31:0] pc0, logic [31:0] stop_pc, int bubble_pct);
    visits.delete();
    pc = pc0;
    while (pc != stop_pc) begin
      @(negedge clk);
      fire = ($urandom() % 100) >= bubble_pct;
      #1;
      if (fire) begin
        visits[pc] = visits.exists(pc) ? visits[pc] + 1 : 1;
        nxt = jump ? target : pc + 4;
        @(posedge clk);
        #1 pc = nxt;
      end
    end
    @(negedge clk); fire = 0;
  endtask

  task automatic expect_visits(logic [31:0] a, int n);
    checks++;
    if (!visits.exists(a) || visits[a] != n) begin
      failures++;
      $display("FAIL pc %h fetched %0d times, expected %0d", a, visits.exists(a) ? visits[a] : 0, n);
    end
  endtask


  // two-level nest: outer level 1 over [s1, e1], count n1; inner level 0 over [s0, e0],
  // count n0, set up by the instruction at s0-4 on every outer iteration
  task automatic run_nest(logic [31:0] s1, logic [31:0] e1, int n1,
                          logic [31:0] s0, logic [31:0] e0, int n0, int bubble_pct);
    int guard = 0;
    setup(1, s1, e1, n1);
    visits.delete();
    pc = s1;
    while (pc != e1 + 4 && guard < 5000) begin
      guard++;
      if (pc == s0 - 4) begin
        visits[pc] = visits.exists(pc) ? visits[pc] + 1 : 1;
        setup(0, s0, e0, n0);
        pc = s0;
      end else begin
        @(negedge clk); fire = ($urandom() % 100) >= bubble_pct; #1;
        if (fire) begin
          visits[pc] = visits.exists(pc) ? visits[pc] + 1 : 1;
          nxt = jump ? target : pc + 4;
          @(posedge clk);
          #1 pc = nxt;
        end
      end
    end
    @(negedge clk); fire = 0;
    for (logic [31:0] a = s1; a <= e1; a += 4)
      expect_visits(a, (a >= s0 && a <= e0) ? n1 * n0 : n1);
  endtask

  initial begin
    we = 0; idx = 0; start = 0; lend = 0; count = 0; fire = 0; pc = 0;
    #12 rst_n = 1;
    // body 0x104..0x110 (4 instructions), 9 iterations
    setup(0, 32'h104, 32'h110, 9);
    run(32'h104, 32'h118, 0);
    expect_visits(32'h104, 9); expect_visits(32'h110, 9); expect_visits(32'h114, 1);
    // same with random fetch bubbles, 32 iterations (as in the paper's kernel)
    setup(0, 32'h204, 32'h214, 32);
    run(32'h204, 32'h21c, 40);
    expect_visits(32'h204, 32); expect_visits(32'h214, 32); expect_visits(32'h218, 1);
    // one-instruction body, 5 iterations; then count 1
    setup(1, 32'h300, 32'h300, 5);
    run(32'h300, 32'h308, 20);
    expect_visits(32'h300, 5);
    setup(1, 32'h400, 32'h404, 1);
    run(32'h400, 32'h40c, 0);
    expect_visits(32'h400, 1); expect_visits(32'h404, 1);
    // nest: outer loop 1 over 0x500..0x514 (3 iterations), inner loop 0 over 0x508..0x50c
    // (4 iterations) re-armed at 0x504 each outer iteration
    setup(1, 32'h500, 32'h514, 3);
    begin
      int outer_seen = 0;
      visits.delete();
      pc = 32'h500;
      while (pc != 32'h518) begin
        if (pc == 32'h504) begin
          visits[pc] = visits.exists(pc) ? visits[pc] + 1 : 1;
          setup(0, 32'h508, 32'h50c, 4);
          pc = 32'h508;
        end else begin
          @(negedge clk); fire = 1; #1;
          visits[pc] = visits.exists(pc) ? visits[pc] + 1 : 1;
          nxt = jump ? target : pc + 4;
          @(posedge clk);
          #1 pc = nxt;
        end
        outer_seen++;
        if (outer_seen > 1000) break;
      end
      @(negedge clk); fire = 0;
    end
    expect_visits(32'h500, 3); expect_visits(32'h504, 3); expect_visits(32'h508, 12);
    expect_visits(32'h50c, 12); expect_visits(32'h510, 3); expect_visits(32'h514, 3);
    // random nests
    for (int k = 0; k < 200; k++) begin
      logic [31:0] s1, e1, s0, e0;
      s1 = 32'h1000 + 32'h100 * k;
      s0 = s1 + 4 * (1 + $urandom() % 4);          // at least the setup before it
      e0 = s0 + 4 * ($urandom() % 4);
      e1 = ($urandom() % 3 == 0) ? e0 : e0 + 4 * (1 + $urandom() % 3);
      run_nest(s1, e1, 1 + $urandom() % 6, s0, e0, 1 + $urandom() % 6, $urandom() % 50);
    end
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
