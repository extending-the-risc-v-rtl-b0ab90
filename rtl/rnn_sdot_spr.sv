// rnn_sdot_spr: the two special-purpose weight registers of pl.sdotsp.h.
//
// pl.sdotsp.h.N multiplies rs2 by the packed weights held in SPR N, and at the same time
// loads the next weight word from memory into that same SPR. The load returns one cycle
// after the multiply has used the old value. Two SPRs, used alternately by .0 and .1, let
// the next instruction use the other register instead of waiting for the load. The write
// comes from the load write-back (we_i/waddr_i/wdata_i). The read port is combinational
// and feeds operand A of the multiplier. Both registers reset to zero.
// The two registers and their alternating use follow the paper. The reset value is this
// design's choice.
module rnn_sdot_spr #(
  parameter int unsigned N_SPR = 2
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     we_i,
  input  logic [$clog2(N_SPR)-1:0] waddr_i,
  input  logic [31:0]              wdata_i,
  input  logic [$clog2(N_SPR)-1:0] raddr_i,
  output logic [31:0]              rdata_o
);

  logic [31:0] spr_q [N_SPR];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < N_SPR; i++) spr_q[i] <= '0;
    end else if (we_i) begin
      spr_q[waddr_i] <= wdata_i;
    end
  end

  assign rdata_o = spr_q[raddr_i];

endmodule
