// tb_mem_model: behavioural single-port memory with a req/gnt/rvalid port, for testbenches.
//
// A request is granted in a cycle with probability GNT_PCT percent, provided that no earlier
// response is still waiting (or it goes out in the same cycle). The access happens at the
// grant. The response (rvalid, with rdata for reads) follows 1 + a random 0..MAX_LAT
// cycles later. Writes honour the byte enables. Words are addressed by addr[31:2] modulo
// WORDS. gnt_pct and max_lat start at the parameters and may be changed at run time.
// Testbenches load and inspect `mem` hierarchically. stall_cycles counts the
// cycles in which a request waited for its grant.
module tb_mem_model
  import rnn_pkg::*;
#(
  parameter int unsigned WORDS   = 16384,
  parameter int unsigned GNT_PCT = 100,
  parameter int unsigned MAX_LAT = 0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t req_i,
  output mem_rsp_t rsp_o
);
  logic [31:0] mem [WORDS];
  logic        pending;
  int unsigned delay;
  logic [31:0] rdata_q;
  logic        roll;
  int unsigned stall_cycles;
  int unsigned accesses;
  int unsigned gnt_pct = GNT_PCT;   // may be changed at run time by the testbench
  int unsigned max_lat = MAX_LAT;

  initial begin
    foreach (mem[i]) mem[i] = '0;
    roll = 1'b1;
  end

  always @(negedge clk_i) roll = ($urandom() % 100) < gnt_pct;

  always_comb begin
    rsp_o.rvalid = pending && (delay == 0);
    rsp_o.rdata  = rsp_o.rvalid ? rdata_q : 32'hdead_beef;
    rsp_o.gnt    = req_i.req && roll && (!pending || rsp_o.rvalid);
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending      <= 1'b0;
      delay        <= 0;
      rdata_q      <= '0;
      stall_cycles <= 0;
      accesses     <= 0;
    end else begin
      if (req_i.req && !rsp_o.gnt) stall_cycles <= stall_cycles + 1;
      if (rsp_o.gnt) begin
        int unsigned w;
        w = (req_i.addr >> 2) % WORDS;
        accesses <= accesses + 1;
        pending  <= 1'b1;
        delay    <= (max_lat == 0) ? 0 : $urandom() % (max_lat + 1);
        rdata_q  <= mem[w];
        if (req_i.we)
          for (int b = 0; b < 4; b++)
            if (req_i.be[b]) mem[w][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end else if (rsp_o.rvalid) begin
        pending <= 1'b0;
      end else if (pending && delay > 0) begin
        delay <= delay - 1;
      end
    end
  end
endmodule
