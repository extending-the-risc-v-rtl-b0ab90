// tb_rnn_sdot_spr: random writes and reads of the two SPRs against a shadow copy;
// checks the reset value and that a write to one SPR leaves the other unchanged.
module tb_rnn_sdot_spr;
  logic clk = 0, rst_n = 0;
  logic we, waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] shadow [2];
  int checks = 0, failures = 0;

  rnn_sdot_spr #(.N_SPR(2)) dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .waddr_i(waddr),
                                 .wdata_i(wdata), .raddr_i(raddr), .rdata_o(rdata));
  always #5 clk = ~clk;

  task automatic check(logic idx);
    raddr = idx; #1;
    checks++;
    if (rdata !== shadow[idx]) begin
      failures++; $display("FAIL spr%0d = %h exp %h", idx, rdata, shadow[idx]);
    end
  endtask

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    shadow[0] = 0; shadow[1] = 0;
    #12 rst_n = 1;
    check(0); check(1);
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we = ($urandom() % 3) != 0; waddr = $urandom(); wdata = $urandom();
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      we = 0;
      check(0); check(1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
