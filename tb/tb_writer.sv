// tb_writer: 40 result blocks broadcast to three channels whose write ports
// accept at random. Every channel must receive every block exactly once, at
// address wr_base + blk with the block's data, in order; ev_block must pulse
// once per block; with all channels always ready the writer must take one
// block per cycle.
`include "tb_util.svh"
module tb_writer;
  import regraph_pkg::*;
  localparam int NCH = 3, NB = 40;
  `TB_SETUP(5000)
  addr_t wr_base = 1000;
  logic in_valid, in_ready, ev_block; result_t in_res;
  logic [NCH-1:0] w_valid, w_ready; addr_t w_addr; blk_t w_data;
  writer #(.NCH(NCH)) dut (.*);
  result_t r [NB];
  int got [NCH], n_block = 0;
  logic fast = 1'b0;
  initial for (int b = 0; b < NB; b++) begin
    r[b].blk = b;
    for (int l = 0; l < 16; l++) r[b].val[l] = $urandom;
  end
  always @(negedge clk) for (int c = 0; c < NCH; c++) w_ready[c] = fast || ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
    if (ev_block) n_block++;
    for (int c = 0; c < NCH; c++) if (w_valid[c] && w_ready[c]) begin
      `CHECK(got[c] < NB, "extra write")
      if (got[c] < NB) begin
        `CHECK(w_addr == 1000 + got[c] && w_data == blk_t'(r[got[c]].val), $sformatf("channel %0d block %0d", c, got[c]))
        got[c]++;
      end
    end
  end
  longint t0;
  initial begin
    for (int c = 0; c < NCH; c++) got[c] = 0;
    in_valid = 0; in_res = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      if (b == NB - 10) begin fast = 1'b1; t0 = $time; end
      in_valid = 1; in_res = r[b];
      do @(posedge clk); while (!in_ready);
    end
    `CHECK(($time - t0) / 10 <= 10 + 2, $sformatf("10 blocks took %0d cycles with ready channels", ($time - t0) / 10))
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    for (int c = 0; c < NCH; c++) `CHECK(got[c] == NB, $sformatf("channel %0d got %0d blocks", c, got[c]))
    `CHECK(n_block == NB, "ev_block once per block")
    `TB_DONE
  end
endmodule
