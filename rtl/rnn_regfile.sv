// rnn_regfile: general-purpose register file, 3 read ports and 2 write ports.
//
// Read ports A, B and C are combinational (rs1, rs2 and rd as accumulator). Write port A
// carries the execute-stage result and write port B the load write-back. Both write on the
// rising clock edge. If both write the same register in one cycle, port A wins: it belongs
// to the younger instruction. Register 0 reads as zero and ignores writes. All registers
// reset to zero. The port count matches the baseline core. The reset and write priority
// are this design's choices.
module rnn_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned XLEN  = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [$clog2(NREGS)-1:0] raddr_a_i,
  input  logic [$clog2(NREGS)-1:0] raddr_b_i,
  input  logic [$clog2(NREGS)-1:0] raddr_c_i,
  output logic [XLEN-1:0]          rdata_a_o,
  output logic [XLEN-1:0]          rdata_b_o,
  output logic [XLEN-1:0]          rdata_c_o,
  input  logic                     we_a_i,
  input  logic [$clog2(NREGS)-1:0] waddr_a_i,
  input  logic [XLEN-1:0]          wdata_a_i,
  input  logic                     we_b_i,
  input  logic [$clog2(NREGS)-1:0] waddr_b_i,
  input  logic [XLEN-1:0]          wdata_b_i
);

  logic [XLEN-1:0] rf_q [NREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NREGS; i++) rf_q[i] <= '0;
    end else begin
      rf_q[0] <= '0;
      for (int i = 1; i < NREGS; i++) begin
        if (we_a_i && int'(waddr_a_i) == i)      rf_q[i] <= wdata_a_i;
        else if (we_b_i && int'(waddr_b_i) == i) rf_q[i] <= wdata_b_i;
      end
    end
  end

  assign rdata_a_o = (raddr_a_i == '0) ? '0 : rf_q[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == '0) ? '0 : rf_q[raddr_b_i];
  assign rdata_c_o = (raddr_c_i == '0) ? '0 : rf_q[raddr_c_i];

endmodule
