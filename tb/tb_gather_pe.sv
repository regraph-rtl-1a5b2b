// tb_gather_pe: one Gather PE with a 16-word buffer. After the reset-time
// clear it takes 300 random updates, one per cycle, many of them back to back
// on the same word so the read-after-write bypass is used, and must accept
// them in 300 cycles (II of one). A flush must then return every word, in
// order, equal to the sums kept here, with the last flag on word 15; a second
// round checks that the buffer was cleared by the flush.
`include "tb_util.svh"
module tb_gather_pe;
  import regraph_pkg::*;
  localparam int unsigned D = 16;
  `TB_SETUP(20000)
  logic upd_valid, upd_ready, flush, idle, out_valid, out_ready, out_last;
  logic [$clog2(D):0] upd_addr;
  prop_t upd_val;
  word_t out_data;
  gather_pe #(.DEPTH_WORDS(D)) dut (.*);

  int unsigned ref_v [2*D];
  int n_bypass = 0;
  always @(posedge clk) if (dut.s1_valid && dut.hist_valid && dut.hist_addr == dut.s1_addr) n_bypass++;

  task automatic round(int n);
    longint t0, t1;
    for (int v = 0; v < 2*D; v++) ref_v[v] = 0;
    @(negedge clk);
    t0 = $time;
    for (int i = 0; i < n; i++) begin
      upd_valid = 1'b1;
      upd_addr  = (i % 3 != 0 && i > 0) ? upd_addr : ($clog2(D)+1)'($urandom % (2*D));
      if ($urandom % 4 == 0) upd_addr[0] = ~upd_addr[0];
      upd_val   = $urandom % 1000;
      @(posedge clk);
      `CHECK(upd_ready, "update accepted every cycle")
      ref_v[upd_addr] += upd_val;
      @(negedge clk);
    end
    t1 = $time;
    upd_valid = 1'b0;
    `CHECK((t1 - t0) == 10 * n, "II of one")
    wait (idle);
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    for (int w = 0; w < D; w++) begin
      out_ready = ($urandom % 3 != 0);
      @(posedge clk);
      while (!(out_valid && out_ready)) begin @(negedge clk); out_ready = ($urandom % 3 != 0); @(posedge clk); end
      `CHECK(out_data == {ref_v[2*w+1], ref_v[2*w]}, $sformatf("word %0d", w))
      `CHECK(out_last == (w == D - 1), "last flag")
      @(negedge clk);
    end
    out_ready = 1'b0;
  endtask

  initial begin
    upd_valid = 0; upd_addr = 0; upd_val = 0; flush = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (upd_ready);
    round(300);
    repeat (3) @(posedge clk);
    round(50);
    `CHECK(n_bypass > 0, "read-after-write bypass used")
    `TB_DONE
  end
endmodule
