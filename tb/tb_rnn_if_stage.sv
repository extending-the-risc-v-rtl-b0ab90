// tb_rnn_if_stage: the fetch stage against a memory with random grants and latency.
// The memory holds instr = address ^ 32'h5a5a_0000 so every delivered word can be checked
// against its pc. A consumer takes instructions with random back-pressure and follows
// its own reference of the expected pc: sequential, redirected at random points to
// random targets, and looping back when a hardware loop set up through the stage's
// ports ends. Also checks one instruction per cycle with an always-ready memory.
module tb_rnn_if_stage;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t ireq;
  mem_rsp_t irsp;
  logic valid, ready, redirect, hw_we, hw_idx, hw_jump;
  logic [31:0] instr, pc, redirect_pc, hw_start, hw_end, hw_cnt;
  int checks = 0, failures = 0;
  int unsigned gnt_pct = 100;
  int consumed = 0;

  rnn_if_stage #(.BOOT_ADDR(32'h80), .FIFO_DEPTH(3)) dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_req_o(ireq), .instr_rsp_i(irsp),
    .valid_o(valid), .instr_o(instr), .pc_o(pc), .ready_i(ready),
    .redirect_i(redirect), .redirect_pc_i(redirect_pc),
    .hwlp_we_i(hw_we), .hwlp_idx_i(hw_idx), .hwlp_start_i(hw_start), .hwlp_end_i(hw_end),
    .hwlp_count_i(hw_cnt), .hwlp_jump_o(hw_jump));

  // memory: random grant and latency controlled from here
  logic pending; int unsigned delay; logic [31:0] raddr; logic roll;
  always @(negedge clk) roll = ($urandom() % 100) < gnt_pct;
  always_comb begin
    irsp.rvalid = pending && delay == 0;
    irsp.rdata  = raddr ^ 32'h5a5a_0000;
    irsp.gnt    = ireq.req && roll && (!pending || irsp.rvalid);
  end
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin pending <= 0; delay <= 0; raddr <= 0; end
    else if (irsp.gnt) begin
      pending <= 1; raddr <= ireq.addr;
      delay <= (gnt_pct == 100) ? 0 : $urandom() % 3;
    end else if (irsp.rvalid) pending <= 0;
    else if (pending && delay > 0) delay <= delay - 1;

  always #5 clk = ~clk;

  logic [31:0] exp_pc;
  // hardware-loop reference: body exp 0x200..0x20c, 6 iterations
  int loop_left;

  initial begin
    int cycles_first, n;
    ready = 0; redirect = 0; redirect_pc = 0; hw_we = 0; hw_idx = 0;
    hw_start = 0; hw_end = 0; hw_cnt = 0;
    #12 rst_n = 1;
    exp_pc = 32'h80;
    // phase 1: always-ready memory and consumer, 1 instruction per cycle after start-up
    ready = 1;
    cycles_first = 0;
    n = 0;
    while (n < 40) begin
      @(negedge clk);
      cycles_first++;
      if (valid) begin
        checks++;
        if (pc !== exp_pc || instr !== (exp_pc ^ 32'h5a5a_0000)) begin
          failures++; $display("FAIL seq pc %h exp %h instr %h", pc, exp_pc, instr);
        end
        exp_pc += 4; n++;
      end
    end
    checks++;
    if (cycles_first > 40 + 3) begin
      failures++; $display("FAIL throughput: 40 instructions took %0d cycles", cycles_first);
    end
    // phase 2: random grants, back-pressure and redirects
    gnt_pct = 60;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      ready = ($urandom() % 100) < 70;
      redirect = 0;
      if (valid && ready) begin
        checks++;
        if (pc !== exp_pc || instr !== (exp_pc ^ 32'h5a5a_0000)) begin
          failures++;
          if (failures < 10) $display("FAIL rand pc %h exp %h instr %h", pc, exp_pc, instr);
        end
        consumed++;
        if (($urandom() % 10) == 0) begin
          redirect = 1;
          redirect_pc = {$urandom() % 1024, 2'b00} + 32'h1000;
          exp_pc = redirect_pc;
        end else exp_pc += 4;
      end
    end
    // phase 3: hardware loop, body 0x204..0x210, 6 iterations, set up by the consumer
    @(negedge clk);
    ready = 0;
    hw_we = 1; hw_idx = 0; hw_start = 32'h204; hw_end = 32'h210; hw_cnt = 6;
    redirect = 1; redirect_pc = 32'h204;
    @(negedge clk);
    hw_we = 0; redirect = 0;
    exp_pc = 32'h204; loop_left = 6;
    n = 0;
    while (exp_pc != 32'h21c) begin
      @(negedge clk);
      ready = ($urandom() % 100) < 70;
      if (valid && ready) begin
        checks++;
        if (pc !== exp_pc) begin
          failures++; $display("FAIL loop pc %h exp %h", pc, exp_pc);
        end
        if (exp_pc == 32'h210 && loop_left > 1) begin exp_pc = 32'h204; loop_left--; n++; end
        else exp_pc += 4;
      end
    end
    checks++;
    if (n != 5) begin failures++; $display("FAIL loop-backs %0d", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
