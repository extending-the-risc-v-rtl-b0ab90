// tb_rnn_act_unit: checks pl.tanh / pl.sig against the exact functions.
// Sweeps every 16-bit Q3.12 input (65536 values) for both functions and compares with
// $tanh and 1/(1+exp(-x)) computed in real arithmetic. Tolerance: 1.0e-3 inside the
// interpolation range, and the saturation error outside it. Also checks exact values
// at 0, at the range limits and at the extremes, and that the result is sign-extended.
module tb_rnn_act_unit;
  logic [31:0] operand, result;
  logic        is_sig;
  int checks = 0, failures = 0;

  rnn_act_unit dut (.operand_i(operand), .is_sig_i(is_sig), .result_o(result));

  function automatic real f_exact(input real x, input logic sig);
    if (sig) return 1.0 / (1.0 + $exp(-x));
    return $tanh(x);
  endfunction

  task automatic check_exact(input logic sig, input logic [15:0] x, input logic [15:0] exp_y);
    operand = {16'hdead, x}; is_sig = sig; #1;
    checks++;
    if (result !== {{16{exp_y[15]}}, exp_y}) begin
      failures++;
      $display("FAIL %s(%0h): got %0h expected %0h", sig ? "sig" : "tanh", x, result, exp_y);
    end
  endtask

  initial begin
    real x, y, err, tol, maxerr [2];
    maxerr[0] = 0.0; maxerr[1] = 0.0;
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < 65536; i++) begin
        operand = {$urandom(), 16'(i)};           // upper half is ignored
        operand[15:0] = 16'(i);
        is_sig  = s[0];
        #1;
        x   = real'($signed(16'(i))) / 4096.0;
        y   = real'($signed(result[15:0])) / 4096.0;
        err = (y > f_exact(x, s[0])) ? y - f_exact(x, s[0]) : f_exact(x, s[0]) - y;
        tol = 1.0e-3;
        if ((s == 0 && (x >= 4.0 || x <= -4.0)) || (s == 1 && (x >= 8.0 || x <= -8.0)))
          tol = 1.0 - f_exact(s == 0 ? 4.0 : 8.0, s[0]) + 1.0e-4;
        if (err > maxerr[s]) maxerr[s] = err;
        checks++;
        if (err > tol || result[31:16] != {16{result[15]}}) begin
          failures++;
          if (failures < 10) $display("FAIL %s x=%f y=%f exact=%f", s ? "sig" : "tanh", x, y, f_exact(x, s[0]));
        end
      end
    end
    $display("max error tanh %e sig %e", maxerr[0], maxerr[1]);
    check_exact(0, 16'h7fff, 16'h1000);   // tanh(~8) -> 1
    check_exact(1, 16'h0000, 16'h0800);   // sig(0) = 0.5
    check_exact(0, 16'h4000, 16'h1000);   // tanh(4)  -> +1 (saturation)
    check_exact(0, 16'hc000, 16'hf000);   // tanh(-4) -> -1
    check_exact(1, 16'h8000, 16'h0000);   // sig(-8)  -> 0
    check_exact(0, 16'h8000, 16'hf000);   // tanh(-8) -> -1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
