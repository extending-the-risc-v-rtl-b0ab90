// tb_rnn_lsu: random byte/half/word loads and stores through the LSU into a memory with
// random grants (50 %) and response latency (0..2 extra cycles). The testbench keeps
// a shadow copy of memory, holds each request until it is granted, and checks every load
// result (alignment, sign/zero extension) and its tag. It also checks that grant stalls
// occurred and that busy_o is high exactly while an access is outstanding.
module tb_rnn_lsu;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req, we, sgn, gnt, busy, wbv;
  logic [31:0] addr, wdata, wbd;
  mem_size_e size;
  lsu_tag_t tag, ptag, wbtag;
  mem_req_t dreq;
  mem_rsp_t drsp;
  int checks = 0, failures = 0, stalls = 0, loads = 0;
  logic [7:0] shadow [1024];

  rnn_lsu dut (.clk_i(clk), .rst_ni(rst_n), .ex_req_i(req), .ex_we_i(we), .ex_addr_i(addr),
    .ex_wdata_i(wdata), .ex_size_i(size), .ex_signed_i(sgn), .ex_tag_i(tag), .ex_gnt_o(gnt),
    .busy_o(busy), .pend_tag_o(ptag), .wb_valid_o(wbv), .wb_rdata_o(wbd), .wb_tag_o(wbtag),
    .data_req_o(dreq), .data_rsp_i(drsp));
  tb_mem_model #(.WORDS(256), .GNT_PCT(50), .MAX_LAT(2)) mem (.clk_i(clk), .rst_ni(rst_n), .req_i(dreq), .rsp_o(drsp));

  always #5 clk = ~clk;

  // expected results of granted loads, in order
  logic [36:0] expq [$];
  always @(posedge clk) if (rst_n && wbv) begin
    logic [36:0] e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected load result");
    end else begin
      e = expq.pop_front();
      if (wbd !== e[31:0] || wbtag.rf_addr !== e[36:32]) begin
        failures++;
        if (failures < 10) $display("FAIL load data %h exp %h rd %0d exp %0d", wbd, e[31:0], wbtag.rf_addr, e[36:32]);
      end
    end
  end

  initial begin
    foreach (shadow[i]) shadow[i] = 0;
    req = 0; we = 0; sgn = 0; addr = 0; wdata = 0; size = SIZE_W; tag = '0;
    #12 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      size  = mem_size_e'($urandom() % 3);
      addr  = $urandom() % 1024;
      if (size == SIZE_W) addr[1:0] = 0;
      if (size == SIZE_H) addr[0] = 0;
      we    = n < 200 ? 1 : ($urandom() % 3 == 0);
      sgn   = 1'($urandom());
      wdata = $urandom();
      tag   = '0;
      tag.rf_we = !we; tag.rf_addr = 5'($urandom());
      req   = 1;
      #1;
      while (!gnt) begin
        stalls++;
        @(negedge clk); #1;
      end
      // granted in this cycle: compute the expectation from the shadow copy
      if (we) begin
        for (int b = 0; b < (1 << size); b++) shadow[addr + b] = wdata[8*b +: 8];
      end else begin
        logic [31:0] v;
        case (size)
          SIZE_B: v = sgn ? {{24{shadow[addr][7]}}, shadow[addr]} : {24'd0, shadow[addr]};
          SIZE_H: v = sgn ? {{16{shadow[addr+1][7]}}, shadow[addr+1], shadow[addr]}
                          : {16'd0, shadow[addr+1], shadow[addr]};
          default: v = {shadow[addr+3], shadow[addr+2], shadow[addr+1], shadow[addr]};
        endcase
        expq.push_back({tag.rf_addr, v});
        loads++;
      end
      @(posedge clk); #1;
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low after grant"); end
      req = 0;
      // random idle gap
      repeat ($urandom() % 2) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (busy || expq.size() != 0) begin failures++; $display("FAIL access left outstanding"); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no grant stall seen"); end
    $display("loads %0d, grant-stall cycles %0d", loads, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
