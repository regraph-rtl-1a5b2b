// tb_burst_reader: three tasks (21 edges, no edges, 16 edges) read through a
// stalling memory model with random back-pressure on the set output. Every set
// must carry the stored edges, the right valid mask, first/last flags, and
// padding lanes must repeat the last real source ID; the empty task must give
// a single empty set flagged first and last. A fourth task of 40 blocks, run
// with a stall-free memory and a ready consumer, must deliver one edge set
// per cycle after the memory latency.
`include "tb_util.svh"
module tb_burst_reader;
  import regraph_pkg::*;
  `TB_SETUP(5000)
  logic task_valid, task_ready, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic set_valid, set_ready;
  task_t task_i; addr_t mem_req_addr; blk_t mem_rsp_data; edge_set_t set_o;
  burst_reader dut (.*);
  hbm_model #(.WORDS(64), .NRD(1)) u_m (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data),
    .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));

  int unsigned es [64*8], ed [64*8];
  int tn [4] = '{21, 0, 16, 320};
  int tb [4] = '{10, 0, 20, 24};
  int tasks_seen = 0;
  logic fast = 1'b0;
  longint t0, t1;

  initial begin
    for (int b = 0; b < 64; b++) begin
      blk_t x;
      for (int j = 0; j < 8; j++) begin
        es[8*b+j] = 8*b + j; ed[8*b+j] = $urandom;
        x[64*j +: 64] = {32'(ed[8*b+j]), 32'(es[8*b+j])};
      end
      u_m.poke(b, x);
    end
  end

  always @(negedge clk) set_ready = fast || ($urandom % 3 != 0);

  initial begin
    task_valid = 0; task_i = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      @(negedge clk);
      if (t == 3) begin
        wait (tasks_seen == 3);
        @(negedge clk);
        u_m.stall_en = 1'b0; fast = 1'b1;
        @(negedge clk);
        t0 = $time;
      end
      task_valid = 1;
      task_i.edge_base = tb[t]; task_i.num_edges = tn[t]; task_i.dst_base = 0;
      do @(posedge clk); while (!task_ready);
      @(negedge clk); task_valid = 0;
    end
  end

  initial begin
    wait (rst_n);
    for (int t = 0; t < 4; t++) begin
      automatic int nb = (tn[t] == 0) ? 1 : (tn[t] + 7) / 8;
      for (int b = 0; b < nb; b++) begin
        @(posedge clk);
        while (!(set_valid && set_ready)) @(posedge clk);
        `CHECK(set_o.first == (b == 0), "first flag")
        `CHECK(set_o.last == (b == nb - 1), "last flag")
        for (int j = 0; j < 8; j++) begin
          automatic int e = 8*b + j;
          automatic logic v = (e < tn[t]);
          `CHECK(set_o.valid[j] == v, $sformatf("task %0d valid lane %0d", t, j))
          if (v) begin
            `CHECK(set_o.src[j] == es[8*tb[t] + e] && set_o.dst[j] == ed[8*tb[t] + e], "edge contents")
          end else if (tn[t] != 0) begin
            `CHECK(set_o.src[j] == es[8*tb[t] + tn[t] - 1], "padding repeats last source")
          end
        end
      end
      tasks_seen++;
    end
    t1 = $time;
    `CHECK((t1 - t0) / 10 <= 40 + 6 + 4, $sformatf("40 blocks took %0d cycles", (t1 - t0) / 10))
    repeat (20) @(posedge clk);
    `CHECK(!set_valid, "no extra sets")
    `TB_DONE
  end
endmodule
