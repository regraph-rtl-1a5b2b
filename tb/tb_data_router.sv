// tb_data_router: 2000 cycles of random update tuples on all eight inputs with
// random back-pressure at the outputs. Every tuple must leave on output
// dst % 8, each output must deliver exactly the tuples sent to it (count and
// checksum), the tuples of one input to one output must keep their order, and
// conflicts must have occurred.
`include "tb_util.svh"
module tb_data_router;
  import regraph_pkg::*;
  `TB_SETUP(20000)
  logic [7:0] in_valid, in_ready, out_valid, out_ready;
  update_t [7:0] in_upd, out_upd;
  logic empty, ev_conflict;
  data_router dut (.*);

  int sent_cnt [8], got_cnt [8];
  longint sent_sum [8], got_sum [8];
  int seq [8][8], exp_seq [8][8];   // [input][output]
  int n_conf = 0;
  logic running = 1'b1;

  always @(negedge clk) begin
    out_ready = 8'($urandom);
    if (running)
      for (int i = 0; i < 8; i++)
        if (!in_valid[i] || in_ready_q[i]) begin
          in_valid[i] = ($urandom % 4 != 0);
          in_upd[i].dst = ($urandom % 4096);
          // the value encodes input and sequence number for the order check
          in_upd[i].val = {8'(i), 24'(seq[i][in_upd[i].dst % 8])};
        end
  end
  logic [7:0] in_ready_q;
  always @(posedge clk) if (rst_n) begin
    in_ready_q <= in_valid & in_ready;
    if (ev_conflict) n_conf++;
    for (int i = 0; i < 8; i++) if (in_valid[i] && in_ready[i]) begin
      sent_cnt[in_upd[i].dst % 8]++; sent_sum[in_upd[i].dst % 8] += in_upd[i].val;
      seq[i][in_upd[i].dst % 8]++;
    end
    for (int o = 0; o < 8; o++) if (out_valid[o] && out_ready[o]) begin
      automatic int src = out_upd[o].val[31:24];
      checks++;
      if (out_upd[o].dst % 8 != o) begin failures++; $display("FAIL: wrong port o=%0d dst=%0d t=%0t", o, out_upd[o].dst, $time); end
      checks++;
      if (out_upd[o].val[23:0] != 24'(exp_seq[src][o])) begin failures++; $display("FAIL: order in%0d out%0d got %0d exp %0d t=%0t", src, o, out_upd[o].val[23:0], exp_seq[src][o], $time); end
      exp_seq[src][o]++;
      got_cnt[o]++; got_sum[o] += out_upd[o].val;
    end
  end

  initial begin
    for (int o = 0; o < 8; o++) begin
      sent_cnt[o] = 0; got_cnt[o] = 0; sent_sum[o] = 0; got_sum[o] = 0;
      for (int i = 0; i < 8; i++) begin seq[i][o] = 0; exp_seq[i][o] = 0; end
    end
    in_valid = 0; in_upd = '0; in_ready_q = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2000) @(posedge clk);
    // stop only after the offered tuples are taken
    @(negedge clk); running = 1'b0; in_valid = in_valid & ~in_ready_q;
    while (in_valid != 0) begin
      @(posedge clk); @(negedge clk); in_valid = in_valid & ~in_ready_q;
    end
    @(negedge clk); out_ready = '1;
    repeat (50) begin @(negedge clk); out_ready = '1; end
    `CHECK(empty, "network empty at the end")
    for (int o = 0; o < 8; o++) begin
      `CHECK(sent_cnt[o] == got_cnt[o] && sent_sum[o] == got_sum[o], $sformatf("port %0d totals", o))
    end
    `CHECK(n_conf > 0, "conflicts occurred")
    `TB_DONE
  end
endmodule
