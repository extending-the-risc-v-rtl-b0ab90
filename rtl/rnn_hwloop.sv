// rnn_hwloop: zero-overhead hardware-loop controller (two nesting levels).
//
// Each level L holds a start address, an end address (the address of the last instruction
// of the body) and an iteration count. lp.setup/lp.setupi write all three from the execute
// stage (we_i). The start is the instruction after the setup, i.e. pc+4. The controller
// watches every instruction fetch the IF stage issues (fetch_fire_i, fetch_pc_i). When the
// fetched address equals the end of a level whose count is above 1, it asks the IF stage
// to fetch the start next (jump_o/target_o, combinational, same cycle) and decrements the
// count. When the count is 1, the fetch falls through and the count drops to 0, which
// leaves the level inactive. Level 0 is the inner loop and is checked first. A level that
// falls through passes the same end address to level 1.
// Start, count and loop-end registers, and the jump back at the loop end, follow the paper.
// Making the decision at fetch time, the two levels and their priority are this design's
// choices. Because the decision is made at fetch, a loop body must not end within two
// instructions after a taken branch or jump.
module rnn_hwloop #(
  parameter int unsigned N_LOOPS = 2
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       we_i,
  input  logic [$clog2(N_LOOPS)-1:0] idx_i,
  input  logic [31:0]                start_i,
  input  logic [31:0]                end_i,
  input  logic [31:0]                count_i,
  input  logic                       fetch_fire_i,
  input  logic [31:0]                fetch_pc_i,
  output logic                       jump_o,
  output logic [31:0]                target_o
);

  logic [31:0] start_q [N_LOOPS];
  logic [31:0] end_q   [N_LOOPS];
  logic [31:0] cnt_q   [N_LOOPS];

  logic [N_LOOPS-1:0] hit, dec;

  // the first level (innermost) whose end matches and whose count is active decides
  always_comb begin
    logic done;
    done     = 1'b0;
    jump_o   = 1'b0;
    target_o = start_q[0];
    hit      = '0;
    dec      = '0;
    for (int i = 0; i < N_LOOPS; i++) begin
      hit[i] = (fetch_pc_i == end_q[i]) && (cnt_q[i] != '0);
      if (!done && hit[i]) begin
        dec[i] = 1'b1;
        if (cnt_q[i] > 32'd1) begin
          jump_o   = 1'b1;
          target_o = start_q[i];
          done     = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < N_LOOPS; i++) begin
        start_q[i] <= '0;
        end_q[i]   <= '0;
        cnt_q[i]   <= '0;
      end
    end else begin
      for (int i = 0; i < N_LOOPS; i++) begin
        if (we_i && idx_i == i[$clog2(N_LOOPS)-1:0]) begin
          start_q[i] <= start_i;
          end_q[i]   <= end_i;
          cnt_q[i]   <= count_i;
        end else if (fetch_fire_i && dec[i]) begin
          cnt_q[i]   <= cnt_q[i] - 32'd1;
        end
      end
    end
  end

endmodule
