// tb_big_pipeline: one Big pipeline with 32-word Gather PEs (a 512-vertex
// merged sparse partition, vertex d at PE d % 8) on one stalling memory model
// holding a 1024-vertex property array and the edge lists. Runs three tasks
// (one with an empty edge list) and a stall-free repeat of the first, and
// compares every result block with sums computed here. Sources come half from
// a 48-vertex hot range so that consecutive sets hit the same blocks. Checks
// block numbers, the last flag per task, that block reuse and router
// conflicts happened, and that the stall-free run sustains at least one edge
// per cycle.
`include "tb_util.svh"
module tb_big_pipeline;
  import regraph_pkg::*;
  localparam int unsigned GW = 32, U = 16 * GW, V = 1024, NT = 4;
  localparam int unsigned E0 = 900, E1 = 500;
  localparam int unsigned EDGE = V / 16;
  `TB_SETUP(100000)
  logic task_valid, task_ready, e_req_valid, e_req_ready, e_rsp_valid, e_rsp_ready;
  logic p_req_valid, p_req_ready, p_rsp_valid, p_rsp_ready, res_valid, res_ready, res_last;
  logic ev_reuse, ev_conflict;
  task_t task_i; addr_t e_req_addr, p_req_addr; blk_t e_rsp_data, p_rsp_data; result_t res_o;
  addr_t prop_base = 0;
  big_pipeline #(.GATHER_WORDS(GW)) dut (.*);
  hbm_model #(.WORDS(512), .NRD(2), .LAT(8)) u_m (.clk, .rst_n,
    .req_valid({p_req_valid, e_req_valid}), .req_ready({p_req_ready, e_req_ready}),
    .req_addr({p_req_addr, e_req_addr}), .rsp_valid({p_rsp_valid, e_rsp_valid}),
    .rsp_ready({p_rsp_ready, e_rsp_ready}), .rsp_data({p_rsp_data, e_rsp_data}),
    .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));

  int unsigned prop [V];
  int unsigned exp_sum [NT][U];
  task_t tk [NT];
  int unsigned nblk = 0;

  function automatic int unsigned pick_src();
    if ($urandom % 2 == 0) return 400 + $urandom % 48;
    return $urandom % V;
  endfunction

  task automatic make_task(int t, int ne, int unsigned dbase);
    int unsigned s[], d[];
    s = new[ne]; d = new[ne];
    for (int e = 0; e < ne; e++) begin s[e] = pick_src(); d[e] = dbase + $urandom % U; end
    s.sort();
    tk[t].edge_base = EDGE + nblk; tk[t].num_edges = ne; tk[t].dst_base = dbase;
    for (int v = 0; v < U; v++) exp_sum[t][v] = 0;
    for (int e = 0; e < ne; e++) begin
      blk_t x;
      if (e % 8 == 0) x = '0; else x = u_m.peek(EDGE + nblk + e / 8);
      x[64*(e%8) +: 64] = {32'(d[e]), 32'(s[e])};
      u_m.poke(EDGE + nblk + e / 8, x);
      exp_sum[t][d[e] - dbase] += prop[s[e]];
    end
    nblk += (ne + 7) / 8;
  endtask

  int n_reuse = 0, n_conflict = 0, tasks_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_reuse) n_reuse++;
    if (ev_conflict) n_conflict++;
  end
  logic fast = 1'b0;
  always @(negedge clk) res_ready = fast || ($urandom % 4 != 0);

  longint t0, t1;
  initial begin
    task_valid = 0; task_i = '0;
    for (int v = 0; v < V; v++) prop[v] = $urandom % (1 << 24);
    for (int b = 0; b < V / 16; b++) begin
      blk_t x;
      for (int l = 0; l < 16; l++) x[32*l +: 32] = prop[16*b + l];
      u_m.poke(b, x);
    end
    make_task(0, E0, 0);
    make_task(1, 0, 0);
    make_task(2, E1, 0);
    tk[3] = tk[0]; exp_sum[3] = exp_sum[0];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      if (t == 3) begin
        wait (tasks_done == 3);
        repeat (20) @(posedge clk);
        @(negedge clk);
        u_m.stall_en = 1'b0; fast = 1'b1;
        t0 = $time;
      end
      @(negedge clk); task_valid = 1; task_i = tk[t];
      do @(posedge clk); while (!task_ready);
      @(negedge clk); task_valid = 0;
    end
  end

  initial begin
    wait (rst_n);
    for (int t = 0; t < NT; t++)
      for (int b = 0; b < U / 16; b++) begin
        @(posedge clk);
        while (!(res_valid && res_ready)) @(posedge clk);
        `CHECK(res_o.blk == tk[t].dst_base / 16 + b, $sformatf("task %0d block number", t))
        `CHECK(res_last == (b == U / 16 - 1), "last flag")
        for (int l = 0; l < 16; l++)
          `CHECK(res_o.val[l] == exp_sum[t][16*b + l], $sformatf("task %0d vertex %0d", t, 16*b + l))
        if (b == U / 16 - 1) tasks_done++;
      end
    t1 = $time;
    $display("fast run: %0d edges in %0d cycles", E0, (t1 - t0) / 10);
    `CHECK((t1 - t0) / 10 <= E0 + U / 16 + 40, "at least one edge per cycle (plus drain)")
    `CHECK(n_reuse > 20, $sformatf("block reuse (%0d)", n_reuse))
    `CHECK(n_conflict > 20, $sformatf("router conflicts (%0d)", n_conflict))
    `TB_DONE
  end
endmodule
