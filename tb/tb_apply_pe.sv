// tb_apply_pe: 60 result blocks through one Apply PE, out-degrees from a
// stalling memory model (some zero), random output back-pressure. Each new
// property must equal (((108*t) >> 7) << 16) / deg >> 16 computed here in 64
// bits, or 0 for a zero degree, and blocks must leave in order.
`include "tb_util.svh"
module tb_apply_pe;
  import regraph_pkg::*;
  localparam int NB = 60;
  `TB_SETUP(5000)
  addr_t deg_base = 64;
  logic in_valid, in_ready, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready, out_valid, out_ready;
  result_t in_res, out_res; addr_t mem_req_addr; blk_t mem_rsp_data;
  apply_pe dut (.*);
  hbm_model #(.WORDS(256), .NRD(1), .LAT(12)) u_m (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data),
    .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));
  int unsigned t [NB][16], dg [NB][16];
  initial for (int b = 0; b < NB; b++) begin
    blk_t x;
    for (int l = 0; l < 16; l++) begin
      t[b][l] = $urandom; dg[b][l] = ($urandom % 8 == 0) ? 0 : 1 + $urandom % 300;
      x[32*l +: 32] = dg[b][l];
    end
    u_m.poke(64 + b, x);
  end
  always @(negedge clk) out_ready = ($urandom % 3 != 0);
  initial begin
    in_valid = 0; in_res = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      in_valid = 1; in_res.blk = b;
      for (int l = 0; l < 16; l++) in_res.val[l] = t[b][l];
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk); in_valid = 0;
  end
  initial begin
    wait (rst_n);
    for (int b = 0; b < NB; b++) begin
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      `CHECK(out_res.blk == b, "order")
      for (int l = 0; l < 16; l++) begin
        automatic logic [63:0] x = ((64'd108 * 64'(t[b][l])) >> 7) << 16;
        automatic int unsigned e = (dg[b][l] == 0) ? 0 : 32'((x / 64'(dg[b][l])) >> 16);
        `CHECK(out_res.val[l] == e, $sformatf("block %0d lane %0d", b, l))
      end
    end
    `TB_DONE
  end
endmodule
