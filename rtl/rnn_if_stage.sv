// rnn_if_stage: instruction fetch with a prefetch FIFO and the hardware-loop controller.
//
// Fetches one 32-bit word per request over a req/gnt/rvalid port, with at most one response
// outstanding. A new request goes out in the same cycle as the previous response, so a
// memory that answers in the cycle after the grant sustains one instruction per cycle.
// Responses enter a FIFO (FIFO_DEPTH entries). Its head is offered to the ID/EX stage
// (valid_o, instr_o, pc_o) and is removed when ready_i is high. A request is made only if
// the FIFO will have room for its response. A request without a grant is held unchanged
// until granted.
// Next fetch address: pc+4, or the loop start when the hardware-loop controller
// (rnn_hwloop, fed with every issued fetch) reports that the address just fetched is the
// end of an active loop. redirect_i (taken branch, jump, loop setup) empties the FIFO and
// drops any response still in flight. Fetching restarts at redirect_pc_i in the next cycle.
// The FIFO and the hardware loops in the fetch stage follow the baseline core's
// organisation. The depth and the single outstanding request are this design's choices.
module rnn_if_stage
  import rnn_pkg::*;
#(
  parameter logic [31:0] BOOT_ADDR  = 32'h0000_0000,
  parameter int unsigned FIFO_DEPTH = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // instruction memory port
  output mem_req_t    instr_req_o,
  input  mem_rsp_t    instr_rsp_i,
  // to ID/EX
  output logic        valid_o,
  output logic [31:0] instr_o,
  output logic [31:0] pc_o,
  input  logic        ready_i,
  // control flow change from ID/EX
  input  logic        redirect_i,
  input  logic [31:0] redirect_pc_i,
  // hardware-loop setup from ID/EX
  input  logic        hwlp_we_i,
  input  logic        hwlp_idx_i,
  input  logic [31:0] hwlp_start_i,
  input  logic [31:0] hwlp_end_i,
  input  logic [31:0] hwlp_count_i,
  output logic        hwlp_jump_o        // a loop-back was taken this cycle
);

  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [31:0] pc_q;
  logic        outst_q, outst_kill_q;
  logic [31:0] outst_pc_q;
  logic        hold_q, hold_kill_q;
  logic [31:0] hold_addr_q;
  logic [31:0] fifo_instr_q [FIFO_DEPTH];
  logic [31:0] fifo_pc_q    [FIFO_DEPTH];
  logic [PW-1:0] rd_ptr_q, wr_ptr_q;
  logic [CW-1:0] count_q;

  logic resp, push, pop, new_ok, fire, fire_killed, hw_jump;
  logic [31:0] addr, hw_target;

  always_comb begin
    resp        = outst_q && instr_rsp_i.rvalid;
    push        = resp && !outst_kill_q && !redirect_i;
    valid_o     = (count_q != '0);
    pop         = valid_o && ready_i && !redirect_i;
    new_ok      = !hold_q && (!outst_q || resp) && !redirect_i &&
                  ((32'(count_q) + (outst_q ? 32'd1 : 32'd0)) < FIFO_DEPTH);
    addr        = hold_q ? hold_addr_q : pc_q;
    instr_req_o       = '0;
    instr_req_o.req   = hold_q || new_ok;
    instr_req_o.addr  = addr;
    instr_req_o.be    = 4'b1111;
    fire        = instr_req_o.req && instr_rsp_i.gnt;
    fire_killed = hold_q && (hold_kill_q || redirect_i);
    instr_o     = fifo_instr_q[rd_ptr_q];
    pc_o        = fifo_pc_q[rd_ptr_q];
  end

  rnn_hwloop #(.N_LOOPS(2)) i_hwloop (
    .clk_i, .rst_ni,
    .we_i        (hwlp_we_i),
    .idx_i       (hwlp_idx_i),
    .start_i     (hwlp_start_i),
    .end_i       (hwlp_end_i),
    .count_i     (hwlp_count_i),
    .fetch_fire_i(fire && !fire_killed && !redirect_i),
    .fetch_pc_i  (addr),
    .jump_o      (hw_jump),
    .target_o    (hw_target)
  );

  assign hwlp_jump_o = fire && !fire_killed && !redirect_i && hw_jump;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q         <= BOOT_ADDR;
      outst_q      <= 1'b0;
      outst_kill_q <= 1'b0;
      outst_pc_q   <= '0;
      hold_q       <= 1'b0;
      hold_kill_q  <= 1'b0;
      hold_addr_q  <= '0;
      rd_ptr_q     <= '0;
      wr_ptr_q     <= '0;
      count_q      <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) begin
        fifo_instr_q[i] <= '0;
        fifo_pc_q[i]    <= '0;
      end
    end else begin
      // ---- request side
      if (fire) begin
        outst_q      <= 1'b1;
        outst_kill_q <= fire_killed;
        outst_pc_q   <= addr;
        hold_q       <= 1'b0;
        hold_kill_q  <= 1'b0;
        if (!fire_killed && !redirect_i) pc_q <= hw_jump ? hw_target : addr + 32'd4;
      end else begin
        if (resp) outst_q <= 1'b0;
        else if (redirect_i) outst_kill_q <= 1'b1;
        if (instr_req_o.req) begin       // not granted: hold it
          hold_q      <= 1'b1;
          hold_addr_q <= addr;
          if (redirect_i) hold_kill_q <= 1'b1;
        end
      end
      if (redirect_i) pc_q <= redirect_pc_i;
      // ---- FIFO
      if (redirect_i) begin
        rd_ptr_q <= '0;
        wr_ptr_q <= '0;
        count_q  <= '0;
      end else begin
        if (push) begin
          fifo_instr_q[wr_ptr_q] <= instr_rsp_i.rdata;
          fifo_pc_q[wr_ptr_q]    <= outst_pc_q;
          wr_ptr_q <= (32'(wr_ptr_q) == FIFO_DEPTH - 1) ? '0 : wr_ptr_q + 1'b1;
        end
        if (pop) rd_ptr_q <= (32'(rd_ptr_q) == FIFO_DEPTH - 1) ? '0 : rd_ptr_q + 1'b1;
        count_q <= count_q + CW'(push) - CW'(pop);
      end
    end
  end

  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    instr_req_o.req && !instr_rsp_i.gnt |=> instr_req_o.req && $stable(instr_req_o.addr));
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    push |-> (32'(count_q) < FIFO_DEPTH) || pop);

endmodule
