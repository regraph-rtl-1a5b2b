// tb_cluster_merger: three pipelines' result streams, each with its own random
// gaps, and random output back-pressure. Every output block must be the
// lane-wise sum of the three inputs' blocks of the same number, in order.
`include "tb_util.svh"
module tb_cluster_merger;
  import regraph_pkg::*;
  localparam int K = 3, NB = 40;
  `TB_SETUP(5000)
  logic [K-1:0] in_valid, in_ready, in_last; result_t [K-1:0] in_res;
  logic out_valid, out_ready, out_last; result_t out_res;
  cluster_merger #(.K(K)) dut (.*);
  int unsigned v [K][NB][16];
  initial for (int i = 0; i < K; i++) for (int b = 0; b < NB; b++) for (int l = 0; l < 16; l++) v[i][b][l] = $urandom;
  always @(negedge clk) out_ready = ($urandom % 3 != 0);
  for (genvar i = 0; i < K; i++) begin : g_in
    initial begin
      in_valid[i] = 0; in_res[i] = '0; in_last[i] = 0;
      wait (rst_n);
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        while ($urandom % 3 == 0) begin in_valid[i] = 0; @(negedge clk); end
        in_valid[i] = 1; in_res[i].blk = 7 + b; in_last[i] = (b == NB - 1);
        for (int l = 0; l < 16; l++) in_res[i].val[l] = v[i][b][l];
        do @(posedge clk); while (!in_ready[i]);
      end
      @(negedge clk); in_valid[i] = 0;
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      `CHECK(out_res.blk == 7 + b && out_last == (b == NB - 1), "block number / last")
      for (int l = 0; l < 16; l++) `CHECK(out_res.val[l] == v[0][b][l] + v[1][b][l] + v[2][b][l], "sum")
    end
    `TB_DONE
  end
endmodule
