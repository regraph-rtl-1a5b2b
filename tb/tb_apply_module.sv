// tb_apply_module: the Apply module fed by two cluster streams (Little and
// Big) of 50 result blocks each with random gaps, each Apply PE reading
// out-degrees from its own stalling memory model, and random output
// back-pressure. Every block must come out exactly once with the PageRank
// apply result, each stream's blocks in order, and both PEs must at some
// point have offered a block in the same cycle (arbiter contention).
`include "tb_util.svh"
module tb_apply_module;
  import regraph_pkg::*;
  localparam int NB = 50;
  `TB_SETUP(10000)
  addr_t deg_base = 0;
  logic [1:0] in_valid, in_ready, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  result_t [1:0] in_res; addr_t [1:0] mem_req_addr; blk_t [1:0] mem_rsp_data;
  logic out_valid, out_ready, ev_contend; result_t out_res;
  apply_module dut (.*);
  int unsigned t [2][NB][16], dg [2*NB][16];
  int seen [2*NB];
  int n_contend = 0, next_blk [2];
  for (genvar i = 0; i < 2; i++) begin : g_m
    hbm_model #(.WORDS(128), .NRD(1), .LAT(5 + 4 * i)) u_m (.clk, .rst_n,
      .req_valid(mem_req_valid[i]), .req_ready(mem_req_ready[i]), .req_addr(mem_req_addr[i]),
      .rsp_valid(mem_rsp_valid[i]), .rsp_ready(mem_rsp_ready[i]), .rsp_data(mem_rsp_data[i]),
      .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));
    initial begin
      in_valid[i] = 0; in_res[i] = '0;
      #1;
      for (int b = 0; b < 2 * NB; b++) begin
        blk_t x;
        for (int l = 0; l < 16; l++) x[32*l +: 32] = dg[b][l];
        u_m.poke(b, x);
      end
      wait (rst_n);
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        while ($urandom % 3 == 0) begin in_valid[i] = 0; @(negedge clk); end
        in_valid[i] = 1; in_res[i].blk = NB * i + b;
        for (int l = 0; l < 16; l++) in_res[i].val[l] = t[i][b][l];
        do @(posedge clk); while (!in_ready[i]);
      end
      @(negedge clk); in_valid[i] = 0;
    end
  end
  initial for (int b = 0; b < 2 * NB; b++) begin
    seen[b] = 0;
    for (int l = 0; l < 16; l++) begin
      t[b / NB][b % NB][l] = $urandom;
      dg[b][l] = ($urandom % 10 == 0) ? 0 : 1 + $urandom % 1000;
    end
  end
  always @(negedge clk) out_ready = ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n && ev_contend) n_contend++;
  initial begin
    next_blk[0] = 0; next_blk[1] = NB;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2 * NB; n++) begin
      automatic int b, i;
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      b = out_res.blk; i = (b >= NB);
      `CHECK(b < 2 * NB, "block number range")
      if (b < 2 * NB) begin
        `CHECK(b == next_blk[i], $sformatf("stream %0d order: got %0d", i, b))
        next_blk[i] = b + 1;
        seen[b]++;
        for (int l = 0; l < 16; l++) begin
          automatic logic [63:0] x = ((64'd108 * 64'(t[i][b % NB][l])) >> 7) << 16;
          automatic int unsigned e = (dg[b][l] == 0) ? 0 : 32'((x / 64'(dg[b][l])) >> 16);
          `CHECK(out_res.val[l] == e, $sformatf("block %0d lane %0d", b, l))
        end
      end
    end
    repeat (20) @(posedge clk);
    `CHECK(!out_valid, "no extra blocks")
    for (int b = 0; b < 2 * NB; b++) `CHECK(seen[b] == 1, $sformatf("block %0d seen %0d times", b, seen[b]))
    `CHECK(n_contend > 0, "arbiter contention")
    `TB_DONE
  end
endmodule
