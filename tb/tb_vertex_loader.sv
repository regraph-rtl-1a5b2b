// tb_vertex_loader: 300 sets of eight non-decreasing source IDs (runs of
// repeats, random gaps, random partial masks, a new task every 50 sets) pass
// through the Vertex Loader against a stalling memory model, with random
// back-pressure on the output. Every valid lane must return the stored
// property. The number of memory requests must equal the number the paper's
// rule gives, computed here: one per valid lane whose block index differs from
// the block index of the last valid lane of the previous set of the task.
// A hit-only stretch must run at one set per cycle.
`include "tb_util.svh"
module tb_vertex_loader;
  import regraph_pkg::*;
  localparam int unsigned NV = 4096;
  localparam int unsigned NS = 300;
  `TB_SETUP(50000)
  logic in_valid, in_ready, in_first, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic out_valid, out_ready, ev_reuse;
  logic [N_LANES-1:0] in_mask; vid_t [N_LANES-1:0] in_src;
  addr_t mem_req_addr; blk_t mem_rsp_data; prop_t [N_LANES-1:0] out_prop;
  addr_t prop_base = 100;
  vertex_loader dut (.*);
  hbm_model #(.WORDS(512), .NRD(1), .LAT(20)) u_m (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data),
    .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));

  int unsigned prop [NV];
  vid_t  s_src [NS][N_LANES];
  logic [N_LANES-1:0] s_mask [NS];
  logic  s_first [NS];
  int    exp_req = 0, n_req = 0;

  initial begin
    automatic int unsigned cur = 0;
    automatic longint last = -1;
    for (int v = 0; v < NV; v++) prop[v] = $urandom;
    for (int b = 0; b < NV/16; b++) begin
      blk_t x;
      for (int l = 0; l < 16; l++) x[32*l +: 32] = prop[16*b + l];
      u_m.poke(100 + b, x);
    end
    for (int s = 0; s < NS; s++) begin
      s_first[s] = (s % 50 == 0);
      if (s_first[s]) begin cur = $urandom % 64; last = -1; end
      s_mask[s] = (s % 7 == 6) ? 8'((1 << (1 + $urandom % 7)) - 1) : '1;
      for (int j = 0; j < N_LANES; j++) begin
        if (s >= 200 && s < 250) cur = cur;                    // hit-only stretch
        else if ($urandom % 3 == 0) cur = cur + $urandom % 40;
        if (cur >= NV) cur = NV - 1;
        s_src[s][j] = cur;
      end
      for (int j = 0; j < N_LANES; j++)
        if (s_mask[s][j] && longint'(s_src[s][j] / 16) != last) exp_req++;
      for (int j = 0; j < N_LANES; j++) if (s_mask[s][j]) last = s_src[s][j] / 16;
    end
  end

  always @(posedge clk) if (mem_req_valid && mem_req_ready) n_req++;
  always @(negedge clk) out_ready = ($urandom % 4 != 0) || (t_hit != 0);
  longint t_hit = 0, t_hit_end = 0;

  initial begin
    in_valid = 0; in_first = 0; in_mask = 0; in_src = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      in_valid = 1; in_first = s_first[s]; in_mask = s_mask[s];
      for (int j = 0; j < N_LANES; j++) in_src[j] = s_src[s][j];
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk); in_valid = 0;
  end

  initial begin
    wait (rst_n);
    for (int s = 0; s < NS; s++) begin
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      if (s == 201) t_hit = $time;
      if (s == 249) t_hit_end = $time;
      for (int j = 0; j < N_LANES; j++)
        if (s_mask[s][j]) `CHECK(out_prop[j] == prop[s_src[s][j]], $sformatf("set %0d lane %0d", s, j))
    end
    `CHECK(n_req == exp_req, $sformatf("requests %0d expected %0d", n_req, exp_req))
    `CHECK(t_hit_end - t_hit <= 10 * (48 + 2), $sformatf("hit-only rate: %0d cycles for 48 sets", (t_hit_end - t_hit) / 10))
    `TB_DONE
  end
endmodule
