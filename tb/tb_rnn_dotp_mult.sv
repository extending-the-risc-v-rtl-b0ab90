// tb_rnn_dotp_mult: random and corner-case vectors for every multiplier operation,
// compared with 64-bit integer arithmetic done in the testbench.
module tb_rnn_dotp_mult;
  import rnn_pkg::*;
  mult_op_e    op;
  logic [31:0] a, b, c, r;
  int checks = 0, failures = 0;

  rnn_dotp_mult dut (.op_i(op), .op_a_i(a), .op_b_i(b), .op_c_i(c), .result_o(r));

  function automatic logic [31:0] model(mult_op_e o, logic [31:0] x, logic [31:0] y, logic [31:0] z);
    longint sx = longint'($signed(x)), sy = longint'($signed(y));
    longint ux = longint'({32'd0, x}), uy = longint'({32'd0, y});
    longint p;
    case (o)
      MUL_MUL:    p = sx * sy;
      MUL_MULH:   p = (sx * sy) >>> 32;
      MUL_MULHSU: p = (sx * uy) >>> 32;
      MUL_MULHU:  p = (ux * uy) >>> 32;
      MUL_MAC:    p = longint'(z) + sx * sy;
      default:    p = longint'(z) + longint'($signed(x[31:16])) * longint'($signed(y[31:16]))
                                  + longint'($signed(x[15:0]))  * longint'($signed(y[15:0]));
    endcase
    return p[31:0];
  endfunction

  task automatic apply(mult_op_e o, logic [31:0] x, logic [31:0] y, logic [31:0] z);
    op = o; a = x; b = y; c = z; #1;
    checks++;
    if (r !== model(o, x, y, z)) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s a=%h b=%h c=%h got %h exp %h", o.name(), x, y, z, r, model(o, x, y, z));
    end
  endtask

  initial begin
    mult_op_e ops [6] = '{MUL_MUL, MUL_MULH, MUL_MULHSU, MUL_MULHU, MUL_MAC, MUL_SDOTSP};
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_8000, 32'h7fff_7fff, 32'h8000_0000};
    foreach (ops[k]) begin
      foreach (corner[i]) foreach (corner[j]) apply(ops[k], corner[i], corner[j], 32'h1234_5678);
      for (int n = 0; n < 2000; n++) apply(ops[k], $urandom(), $urandom(), $urandom());
    end
    // a Q3.12 dot product: (1.5, -2.0) . (0.5, 0.25) accumulated on 0x1000
    apply(MUL_SDOTSP, {16'h1800, 16'he000}, {16'h0800, 16'h0400}, 32'h0000_1000);
    checks++;
    if (r !== 32'h1000 + 32'h00c0_0000 - 32'h0080_0000) begin
      failures++; $display("FAIL fixed-point example %h", r);
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
