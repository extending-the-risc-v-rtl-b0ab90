// rnn_act_unit: single-cycle tanh / sigmoid for the pl.tanh and pl.sig instructions.
//
// The operand is the low half-word of rs1, a signed Q3.12 value; the result is Q3.12,
// sign-extended to 32 bits. The unit is purely combinational and sits in the execute stage,
// so both instructions issue every cycle and write rd in the same cycle.
//
// Method (piecewise-linear interpolation exploiting symmetry):
//   1. a = |x| (17 bits, so that -8.0 is representable).
//   2. id = a >> N. tanh uses N = 9 (interval 0.125, range [-4,4]); sigmoid uses N = 10
//      (interval 0.25, range [-8,8]). Both use 32 intervals.
//   3. id >= 32: saturation. x >= 0 gives 1.0; x < 0 gives -1.0 (tanh) or 0.0 (sigmoid).
//   4. Otherwise y = (m[id]*a + q[id]*2^12 + 2^15) >> 16 with the slope m and offset q of
//      interval id, taken from the tables in rnn_pkg (their formula is given there).
//   5. Negative x: tanh(x) = -y, sig(x) = 1 - y.
// The 32 intervals, the [-4,4] tanh range, the use of symmetry, and the two tables per
// function follow the paper. Its pseudocode tests "id > M" before indexing an M-entry table.
// Here the test is id >= M, the only form that stays inside the table. The sigmoid's own,
// wider interval is a choice of this design: the paper picks the range by looking at tanh
// alone. With [-4,4], sigmoid would be off by 0.018 at the edge of the range.
module rnn_act_unit
  import rnn_pkg::*;
(
  input  logic [31:0] operand_i,
  input  logic        is_sig_i,
  output logic [31:0] result_o
);

  localparam int unsigned TANH_SHIFT = 9;
  localparam int unsigned SIG_SHIFT  = 10;
  localparam logic signed [15:0] ONE = 16'sd4096;

  logic signed [15:0] x;
  logic        [16:0] ax;
  logic        [16:0] idx_full;
  logic        [4:0]  idx;
  logic        [15:0] m;
  logic signed [17:0] q;
  logic signed [35:0] acc;
  logic signed [15:0] y_pos;
  logic signed [15:0] y;

  always_comb begin
    x        = operand_i[15:0];
    ax       = x[15] ? 17'(-$signed({x[15], x})) : {1'b0, x};
    idx_full = is_sig_i ? (ax >> SIG_SHIFT) : (ax >> TANH_SHIFT);
    idx      = idx_full[4:0];
    m        = is_sig_i ? SIG_M[idx] : TANH_M[idx];
    q        = is_sig_i ? SIG_Q[idx] : TANH_Q[idx];
    acc      = $signed({19'd0, m} * {19'd0, ax}) + 36'($signed(q) <<< 12) + 36'sd32768;
    y_pos    = 16'(acc >>> 16);
    if (idx_full >= 17'(ACT_INTERVALS)) begin
      if (!x[15])        y = ONE;
      else if (is_sig_i) y = '0;
      else               y = -ONE;
    end else if (!x[15]) begin
      y = y_pos;
    end else if (is_sig_i) begin
      y = ONE - y_pos;
    end else begin
      y = -y_pos;
    end
    result_o = {{16{y[15]}}, y};
  end

endmodule
