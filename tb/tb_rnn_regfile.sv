// tb_rnn_regfile: random dual writes and triple reads against a shadow register file.
// Checks x0 stays zero, port A wins over port B on the same register, and reset clears all.
module tb_rnn_regfile;
  logic clk = 0, rst_n = 0;
  logic [4:0] ra, rb, rc, wa, wb;
  logic [31:0] qa, qb, qc, wda, wdb;
  logic wea, web;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  rnn_regfile #(.NREGS(32), .XLEN(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .raddr_b_i(rb), .raddr_c_i(rc),
    .rdata_a_o(qa), .rdata_b_o(qb), .rdata_c_o(qc),
    .we_a_i(wea), .waddr_a_i(wa), .wdata_a_i(wda), .we_b_i(web), .waddr_b_i(wb), .wdata_b_i(wdb));
  always #5 clk = ~clk;

  task automatic check_read();
    ra = 5'($urandom()); rb = 5'($urandom()); rc = 5'($urandom()); #1;
    checks++;
    if (qa !== shadow[ra] || qb !== shadow[rb] || qc !== shadow[rc]) begin
      failures++;
      if (failures < 10) $display("FAIL read %0d/%0d/%0d: %h %h %h", ra, rb, rc, qa, qb, qc);
    end
  endtask

  initial begin
    wea = 0; web = 0; wa = 0; wb = 0; wda = 0; wdb = 0; ra = 0; rb = 0; rc = 0;
    foreach (shadow[i]) shadow[i] = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 32; i++) begin ra = 5'(i); #1; checks++; if (qa !== 0) failures++; end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      wea = 1'($urandom()); web = 1'($urandom());
      wa = 5'($urandom()); wb = (n % 7 == 0) ? wa : 5'($urandom());
      wda = $urandom(); wdb = $urandom();
      @(posedge clk); #1;
      if (web && wb != 0) shadow[wb] = wdb;
      if (wea && wa != 0) shadow[wa] = wda;      // port A has priority
      wea = 0; web = 0;
      check_read();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
