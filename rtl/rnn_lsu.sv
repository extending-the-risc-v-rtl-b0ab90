// rnn_lsu: load-store unit. One data access at a time over a req/gnt/rvalid port.
//
// Request phase (same cycle as the instruction in ID/EX): when the execute stage asserts
// ex_req_i and no earlier response is still outstanding (or it arrives this cycle), the
// LSU drives data_req_o.req with address, write enable, byte enables and the write data
// replicated onto the addressed byte lanes. The instruction may leave ID/EX only in the
// cycle the memory grants (ex_gnt_o). Without a grant the execute stage stalls and the
// request stays unchanged. This is the same stall used for ordinary loads, and the
// pl.sdotsp.h load reuses it.
// Response phase: the access and a tag (lsu_tag_t: where the result goes) are kept until
// data_rsp_i.rvalid. In that cycle wb_valid_o is high and wb_rdata_o holds the loaded value,
// shifted down to its byte offset and sign or zero extended. busy_o/pend_tag_o describe the
// outstanding access, for the hazard check. Accesses must be naturally aligned (asserted).
// The request/grant handshake and the stall on a missing grant follow the paper. The single
// outstanding access and the tag are this design's choices.
module rnn_lsu
  import rnn_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // from the execute stage
  input  logic        ex_req_i,
  input  logic        ex_we_i,
  input  logic [31:0] ex_addr_i,
  input  logic [31:0] ex_wdata_i,
  input  mem_size_e   ex_size_i,
  input  logic        ex_signed_i,
  input  lsu_tag_t    ex_tag_i,
  output logic        ex_gnt_o,
  // outstanding access and its completion
  output logic        busy_o,
  output lsu_tag_t    pend_tag_o,
  output logic        wb_valid_o,
  output logic [31:0] wb_rdata_o,
  output lsu_tag_t    wb_tag_o,
  // data memory port
  output mem_req_t    data_req_o,
  input  mem_rsp_t    data_rsp_i
);

  logic      pend_q;
  logic      we_q, signed_q;
  mem_size_e size_q;
  logic [1:0] off_q;
  lsu_tag_t  tag_q;
  logic      can_issue;
  logic [31:0] shifted;

  assign can_issue = !pend_q || data_rsp_i.rvalid;

  always_comb begin
    data_req_o       = '0;
    data_req_o.req   = ex_req_i && can_issue;
    data_req_o.addr  = {ex_addr_i[31:2], 2'b00};
    data_req_o.we    = ex_we_i;
    unique case (ex_size_i)
      SIZE_B: begin
        data_req_o.be    = 4'b0001 << ex_addr_i[1:0];
        data_req_o.wdata = {4{ex_wdata_i[7:0]}};
      end
      SIZE_H: begin
        data_req_o.be    = 4'b0011 << ex_addr_i[1:0];
        data_req_o.wdata = {2{ex_wdata_i[15:0]}};
      end
      default: begin
        data_req_o.be    = 4'b1111;
        data_req_o.wdata = ex_wdata_i;
      end
    endcase
  end

  assign ex_gnt_o = data_req_o.req && data_rsp_i.gnt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q   <= 1'b0;
      we_q     <= 1'b0;
      signed_q <= 1'b0;
      size_q   <= SIZE_W;
      off_q    <= '0;
      tag_q    <= '0;
    end else begin
      if (ex_gnt_o) begin
        pend_q   <= 1'b1;
        we_q     <= ex_we_i;
        signed_q <= ex_signed_i;
        size_q   <= ex_size_i;
        off_q    <= ex_addr_i[1:0];
        tag_q    <= ex_tag_i;
      end else if (data_rsp_i.rvalid) begin
        pend_q   <= 1'b0;
      end
    end
  end

  assign busy_o     = pend_q;
  assign pend_tag_o = tag_q;
  assign wb_valid_o = pend_q && data_rsp_i.rvalid && !we_q;
  assign wb_tag_o   = tag_q;

  always_comb begin
    shifted = data_rsp_i.rdata >> {off_q, 3'b000};
    unique case (size_q)
      SIZE_B:  wb_rdata_o = signed_q ? {{24{shifted[7]}},  shifted[7:0]}  : {24'd0, shifted[7:0]};
      SIZE_H:  wb_rdata_o = signed_q ? {{16{shifted[15]}}, shifted[15:0]} : {16'd0, shifted[15:0]};
      default: wb_rdata_o = shifted;
    endcase
  end

  // ---------------------------------------------------------------- protocol rules
  // a request that is not granted stays asserted with the same address
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_req_o.req && !data_rsp_i.gnt |=> data_req_o.req && $stable(data_req_o.addr));
  // accesses are naturally aligned
  a_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ex_req_i |-> (ex_size_i == SIZE_W && ex_addr_i[1:0] == 2'b00) ||
                 (ex_size_i == SIZE_H && ex_addr_i[0] == 1'b0) || (ex_size_i == SIZE_B));
  // no response without an outstanding access
  a_no_spurious_rvalid: assert property (@(posedge clk_i) disable iff (!rst_ni)
    data_rsp_i.rvalid |-> pend_q);

endmodule
