// tb_rnn_alu: every ALU operation on corner and random operands against expressions
// written independently in the testbench.
module tb_rnn_alu;
  import rnn_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, r;
  logic cmp;
  int checks = 0, failures = 0;

  rnn_alu dut (.op_i(op), .a_i(a), .b_i(b), .result_o(r), .cmp_o(cmp));

  function automatic logic [32:0] model(alu_op_e o, logic [31:0] x, logic [31:0] y);
    longint sx = longint'($signed(x)), sy = longint'($signed(y));
    logic c;
    logic [31:0] v;
    c = 0;
    case (o)
      ALU_ADD: v = x + y;
      ALU_SUB: v = x - y;
      ALU_SLL: v = x << (y % 32);
      ALU_SRL: v = x >> (y % 32);
      ALU_SRA: begin longint t = sx >>> (y % 32); v = t[31:0]; end
      ALU_XOR: v = x ^ y;
      ALU_OR:  v = x | y;
      ALU_AND: v = x & y;
      ALU_EQ:  begin c = (x == y); v = {31'd0, c}; end
      ALU_NE:  begin c = (x != y); v = {31'd0, c}; end
      ALU_LT:  begin c = (sx < sy); v = {31'd0, c}; end
      ALU_GE:  begin c = (sx >= sy); v = {31'd0, c}; end
      ALU_LTU: begin c = ({1'b0, x} < {1'b0, y}); v = {31'd0, c}; end
      default: begin c = !({1'b0, x} < {1'b0, y}); v = {31'd0, c}; end
    endcase
    return {c, v};
  endfunction

  task automatic apply(alu_op_e o, logic [31:0] x, logic [31:0] y);
    op = o; a = x; b = y; #1;
    checks++;
    if ({cmp, r} !== model(o, x, y)) begin
      failures++;
      if (failures < 10) $display("FAIL %s %h %h -> %h/%b exp %h", o.name(), x, y, r, cmp, model(o, x, y));
    end
  endtask

  initial begin
    logic [31:0] corner [5] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff};
    for (int k = 0; k <= int'(ALU_GEU); k++) begin
      foreach (corner[i]) foreach (corner[j]) apply(alu_op_e'(k), corner[i], corner[j]);
      for (int n = 0; n < 500; n++) apply(alu_op_e'(k), $urandom(), $urandom());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
