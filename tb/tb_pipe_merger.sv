// tb_pipe_merger: 32 word sets (four result blocks) from eight lockstep
// Gather PE outputs, with random input gaps and output back-pressure. Each
// block must hold, at position 2w+h, the sum over the eight PEs of half h of
// word w, carry block number blk_base + n, and the last block the last flag.
`include "tb_util.svh"
module tb_pipe_merger;
  import regraph_pkg::*;
  `TB_SETUP(5000)
  addr_t blk_base = 40;
  logic [7:0] in_valid; logic in_ready, in_last, out_valid, out_ready, out_last;
  word_t [7:0] in_data; result_t out_res;
  pipe_merger dut (.*);
  int unsigned w [32][8][2];
  initial for (int i = 0; i < 32; i++) for (int k = 0; k < 8; k++) for (int h = 0; h < 2; h++) w[i][k][h] = $urandom % 100000;
  always @(negedge clk) out_ready = ($urandom % 3 != 0);
  initial begin
    in_valid = 0; in_data = '0; in_last = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = '1; in_last = (i == 31);
      for (int k = 0; k < 8; k++) in_data[k] = {w[i][k][1], w[i][k][0]};
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk); in_valid = 0;
  end
  initial begin
    wait (rst_n);
    for (int b = 0; b < 4; b++) begin
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      `CHECK(out_res.blk == 40 + b, "block number")
      `CHECK(out_last == (b == 3), "last flag")
      for (int p = 0; p < 16; p++) begin
        automatic int unsigned e = 0;
        for (int k = 0; k < 8; k++) e += w[8*b + p/2][k][p%2];
        `CHECK(out_res.val[p] == e, $sformatf("block %0d value %0d", b, p))
      end
    end
    `TB_DONE
  end
endmodule
