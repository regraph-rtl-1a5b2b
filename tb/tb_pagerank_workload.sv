// tb_pagerank_workload: two PageRank iterations on a scaled-down R-MAT graph,
// with the host's preprocessing and scheduling done in the testbench.
//
// Graph: R-MAT generator (a, b, c, d = 0.57, 0.19, 0.19, 0.05), 2^SCALE
// vertices, EF edges per vertex, the same kind of synthetic graph as the
// rmat-S-EF inputs usually used to evaluate graph accelerators, shrunk to
// simulate in seconds. Preprocessing: vertices are relabelled in order of
// falling in-degree (a simplification of degree-based grouping), so that the
// hub vertices form the first partitions. Scheduling: leading U-vertex
// partitions with more than DENSE_F times the average edge count are dense and
// go to the Little cluster, one task per partition per Little pipeline; the
// remaining vertices are padded to whole groups of 8*U and each group is one
// merged sparse partition for the Big cluster. Every partition's edges,
// sorted by source, are cut into one slice per pipeline of its cluster.
// Initial properties are 1.0 / out-degree in 16.16 fixed point.
//
// Iteration 1 reads array A and writes array B; the testbench then swaps the
// two bases (as a host would) and iteration 2 reads B and writes A. After each
// iteration every channel's written array is compared with a reference
// computed here. The accelerator runs at reduced size (2 Little + 2 Big
// pipelines, 32-word Gather PEs, 4-block ping/pong buffers) with stalling
// memories. Reports cycles per iteration and edges per cycle.
module tb_pagerank_workload;
  import regraph_pkg::*;

  localparam int unsigned M       = 2;
  localparam int unsigned N       = 2;
  localparam int unsigned GW      = 32;
  localparam int unsigned BB      = 4;
  localparam int unsigned SCALE   = 11;
  localparam int unsigned EF      = 8;
  localparam int unsigned DENSE_F = 2;
  localparam int unsigned WDOG    = 400000;

  localparam int unsigned NCH   = M + N;
  localparam int unsigned V0    = 1 << SCALE;
  localparam int unsigned E     = V0 * EF;
  localparam int unsigned U     = 2 * GW;
  localparam int unsigned UB    = 8 * U;
  localparam int unsigned VMAX  = V0 + UB;
  localparam int unsigned VBMAX = VMAX / 16;
  localparam int unsigned ARR_A = 0;
  localparam int unsigned ARR_B = VBMAX;
  localparam int unsigned DEG   = 2 * VBMAX;
  localparam int unsigned EDGE  = 3 * VBMAX;
  localparam int unsigned MAXT  = V0 / U + 8;
  localparam int unsigned WORDS = EDGE + E / 8 + 2 * MAXT + 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- graph, schedule and reference ----------------
  int unsigned es [E], ed [E];
  int unsigned prop0 [VMAX], deg [VMAX];
  int unsigned ref1 [VMAX], ref2 [VMAX];
  int unsigned V, VB, ND, NG;
  task_t lt [M][$];
  task_t bt [N][$];
  int unsigned nblk_ch [NCH];
  blk_t  eimg [NCH][E / 8 + 2 * MAXT + 16];
  logic  img_ready = 1'b0;

  function automatic int unsigned rmat_vertex_pair(output int unsigned d);
    int unsigned s = 0;
    d = 0;
    for (int l = 0; l < SCALE; l++) begin
      automatic int unsigned r = $urandom % 100;
      s <<= 1; d <<= 1;
      if (r < 57)      begin end
      else if (r < 76) d |= 1;
      else if (r < 95) s |= 1;
      else             begin s |= 1; d |= 1; end
    end
    return s;
  endfunction

  function automatic void pagerank(input int unsigned p [VMAX], output int unsigned q [VMAX]);
    int unsigned t [VMAX];
    for (int v = 0; v < VMAX; v++) t[v] = 0;
    for (int e = 0; e < E; e++) t[ed[e]] += p[es[e]];
    for (int v = 0; v < VMAX; v++) begin
      automatic logic [63:0] x = ((64'(K_DAMP) * 64'(t[v])) >> 7) << 16;
      q[v] = (deg[v] == 0) ? 0 : 32'((x / 64'(deg[v])) >> 16);
    end
  endfunction

  // cut the sorted edge keys of one partition into one task per pipeline
  task automatic place(int c0, int np, ref longint k[$], input int unsigned dbase, input bit big);
    for (int i = 0; i < np; i++) begin
      automatic int lo = (k.size() * i) / np, hi = (k.size() * (i + 1)) / np;
      automatic int c = c0 + i;
      task_t t;
      t.edge_base = addr_t'(EDGE + nblk_ch[c]);
      t.num_edges = 32'(hi - lo);
      t.dst_base  = vid_t'(dbase);
      for (int e = lo; e < hi; e++) begin
        automatic int q = e - lo;
        eimg[c][nblk_ch[c] + q/8][64*(q%8) +: 64] = {32'(k[e][31:0]), 32'(k[e][63:32])};
      end
      nblk_ch[c] += (hi - lo + 7) / 8;
      if (big) bt[i].push_back(t); else lt[i].push_back(t);
    end
  endtask

  initial begin
    automatic int unsigned indeg [V0];
    automatic int unsigned order [$];
    automatic int unsigned newid [V0];
    automatic int unsigned pcnt;
    automatic longint keys [$];
    void'($urandom(11));
    for (int v = 0; v < V0; v++) indeg[v] = 0;
    for (int e = 0; e < E; e++) begin
      es[e] = rmat_vertex_pair(ed[e]);
      indeg[ed[e]]++;
    end
    // degree-ordered relabelling
    for (int v = 0; v < V0; v++) order.push_back(v);
    order.sort() with (longint'(E - indeg[item]) * V0 + item);
    for (int v = 0; v < V0; v++) newid[order[v]] = v;
    for (int e = 0; e < E; e++) begin es[e] = newid[es[e]]; ed[e] = newid[ed[e]]; end
    // dense partitions: leading partitions with many edges
    ND = 0;
    while (ND < V0 / U - 8) begin
      pcnt = 0;
      for (int e = 0; e < E; e++) if (ed[e] / U == ND) pcnt++;
      if (pcnt <= DENSE_F * EF * U) break;
      ND++;
    end
    if (ND == 0) ND = 1;
    NG = (V0 - ND * U + UB - 1) / UB;
    V  = ND * U + NG * UB;
    VB = V / 16;
    $display("graph: %0d vertices (%0d with padding), %0d edges, %0d dense partitions of %0d, %0d sparse groups of %0d",
             V0, V, E, ND, U, NG, UB);
    for (int v = 0; v < VMAX; v++) begin deg[v] = 0; prop0[v] = 0; end
    for (int e = 0; e < E; e++) deg[es[e]]++;
    for (int v = 0; v < V0; v++) prop0[v] = (deg[v] == 0) ? 0 : (1 << 16) / deg[v];
    pagerank(prop0, ref1);
    pagerank(ref1, ref2);
    // per-channel edge images and task lists
    for (int c = 0; c < NCH; c++) begin
      nblk_ch[c] = 0;
      foreach (eimg[c][b]) eimg[c][b] = '0;
    end
    for (int p = 0; p < ND; p++) begin
      keys.delete();
      for (int e = 0; e < E; e++) if (ed[e] / U == p) keys.push_back({32'(es[e]), 32'(ed[e])});
      keys.sort();
      place(0, M, keys, p * U, 1'b0);
    end
    for (int g = 0; g < NG; g++) begin
      keys.delete();
      for (int e = 0; e < E; e++)
        if (ed[e] >= ND * U + g * UB && ed[e] < ND * U + (g + 1) * UB) keys.push_back({32'(es[e]), 32'(ed[e])});
      keys.sort();
      place(M, N, keys, ND * U + g * UB, 1'b1);
    end
    img_ready = 1'b1;
  end

  // ---------------- DUT and memories ----------------
  addr_t prop_rd_base = ARR_A, prop_wr_base = ARR_B;
  logic  [M-1:0] l_task_valid, l_task_ready;
  task_t [M-1:0] l_task;
  logic  [N-1:0] b_task_valid, b_task_ready;
  task_t [N-1:0] b_task;
  logic  [NCH-1:0] e_req_valid, e_req_ready, e_rsp_valid, e_rsp_ready;
  addr_t [NCH-1:0] e_req_addr;
  blk_t  [NCH-1:0] e_rsp_data;
  logic  [NCH-1:0] p_req_valid, p_req_ready, p_rsp_valid, p_rsp_ready;
  addr_t [NCH-1:0] p_req_addr;
  blk_t  [NCH-1:0] p_rsp_data;
  logic  [NCH-1:0] w_valid, w_ready;
  addr_t w_addr;
  blk_t  w_data;
  logic  [1:0] a_req_valid, a_req_ready, a_rsp_valid, a_rsp_ready;
  addr_t [1:0] a_req_addr;
  blk_t  [1:0] a_rsp_data;
  logic  [M-1:0] ev_jump, ev_switch;
  logic  [N-1:0] ev_reuse, ev_conflict;
  logic  ev_contend, ev_block;

  regraph_top #(.M_LITTLE(M), .N_BIG(N), .GATHER_WORDS(GW), .BUF_BLOCKS(BB)) dut (
    .clk, .rst_n, .prop_rd_base, .prop_wr_base, .deg_base(addr_t'(DEG)),
    .l_task_valid, .l_task_ready, .l_task, .b_task_valid, .b_task_ready, .b_task,
    .e_req_valid, .e_req_ready, .e_req_addr, .e_rsp_valid, .e_rsp_ready, .e_rsp_data,
    .p_req_valid, .p_req_ready, .p_req_addr, .p_rsp_valid, .p_rsp_ready, .p_rsp_data,
    .w_valid, .w_ready, .w_addr, .w_data,
    .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
    .ev_jump, .ev_switch, .ev_reuse, .ev_conflict, .ev_contend, .ev_block);

  function automatic blk_t arr_blk(input int unsigned a [VMAX], int b);
    blk_t x;
    for (int l = 0; l < 16; l++) x[32*l +: 32] = a[16*b + l];
    return x;
  endfunction

  int   n_block = 0, n_jump = 0, n_reuse = 0;
  int   iter = 0;            // iteration being run (1 or 2)
  logic iter_go = 1'b0;      // pulse: start feeding tasks
  int   done_checks [NCH];
  int   done_fail [NCH];
  int   ch_checked [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    hbm_model #(.WORDS(WORDS), .NRD(2)) u_m (
      .clk, .rst_n,
      .req_valid({p_req_valid[c], e_req_valid[c]}), .req_ready({p_req_ready[c], e_req_ready[c]}),
      .req_addr({p_req_addr[c], e_req_addr[c]}),
      .rsp_valid({p_rsp_valid[c], e_rsp_valid[c]}), .rsp_ready({p_rsp_ready[c], e_rsp_ready[c]}),
      .rsp_data({p_rsp_data[c], e_rsp_data[c]}),
      .w_valid(w_valid[c]), .w_ready(w_ready[c]), .w_addr, .w_data);
    initial begin
      done_checks[c] = 0; done_fail[c] = 0; ch_checked[c] = 0;
      wait (img_ready);
      for (int b = 0; b < VB; b++) u_m.poke(ARR_A + b, arr_blk(prop0, b));
      for (int b = 0; b < VB; b++) u_m.poke(ARR_B + b, '1);
      foreach (eimg[c][b]) u_m.poke(EDGE + b, eimg[c][b]);
      for (int it = 1; it <= 2; it++) begin
        wait (ch_checked[c] == it - 1 && iter == it && n_block == VB * it);
        repeat (10) @(posedge clk);
        for (int b = 0; b < VB; b++) begin
          automatic blk_t got = u_m.peek((it == 1 ? ARR_B : ARR_A) + b);
          for (int l = 0; l < 16; l++) begin
            automatic int unsigned e = (it == 1) ? ref1[16*b + l] : ref2[16*b + l];
            done_checks[c]++;
            if (got[32*l +: 32] != e) begin
              if (done_fail[c] < 4)
                $display("MISMATCH iteration %0d ch%0d vertex %0d got %0d exp %0d", it, c, 16*b + l, got[32*l +: 32], e);
              done_fail[c]++;
            end
          end
        end
        ch_checked[c] = it;
      end
    end
  end

  for (genvar a = 0; a < 2; a++) begin : g_ap
    hbm_model #(.WORDS(WORDS), .NRD(1)) u_m (
      .clk, .rst_n,
      .req_valid(a_req_valid[a]), .req_ready(a_req_ready[a]), .req_addr(a_req_addr[a]),
      .rsp_valid(a_rsp_valid[a]), .rsp_ready(a_rsp_ready[a]), .rsp_data(a_rsp_data[a]),
      .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));
    initial begin
      wait (img_ready);
      for (int b = 0; b < VB; b++) u_m.poke(DEG + b, arr_blk(deg, b));
    end
  end

  // ---------------- task drivers (the host's scheduler) ----------------
  for (genvar i = 0; i < M; i++) begin : g_ltask
    initial begin
      l_task_valid[i] = 1'b0;
      l_task[i] = '0;
      for (int it = 1; it <= 2; it++) begin
        wait (iter == it && iter_go);
        foreach (lt[i][p]) begin
          @(negedge clk);
          l_task_valid[i] = 1'b1;
          l_task[i] = lt[i][p];
          do @(posedge clk); while (!l_task_ready[i]);
          @(negedge clk);
          l_task_valid[i] = 1'b0;
        end
      end
    end
  end
  for (genvar j = 0; j < N; j++) begin : g_btask
    initial begin
      b_task_valid[j] = 1'b0;
      b_task[j] = '0;
      for (int it = 1; it <= 2; it++) begin
        wait (iter == it && iter_go);
        foreach (bt[j][p]) begin
          @(negedge clk);
          b_task_valid[j] = 1'b1;
          b_task[j] = bt[j][p];
          do @(posedge clk); while (!b_task_ready[j]);
          @(negedge clk);
          b_task_valid[j] = 1'b0;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    n_block <= n_block + (ev_block ? 1 : 0);
    n_jump  <= n_jump + $countones(ev_jump);
    n_reuse <= n_reuse + $countones(ev_reuse);
  end

  initial begin
    longint t0;
    wait (img_ready);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 1; it <= 2; it++) begin
      @(negedge clk);
      // host: the array written last time is read this time
      prop_rd_base = (it == 1) ? ARR_A : ARR_B;
      prop_wr_base = (it == 1) ? ARR_B : ARR_A;
      iter = it;
      t0 = cycles;
      iter_go = 1'b1;
      @(negedge clk);
      iter_go = 1'b0;
      wait (n_block == VB * it);
      $display("iteration %0d: %0d cycles, %0.2f edges per cycle", it, cycles - t0,
               real'(E) / real'(cycles - t0));
      for (int c = 0; c < NCH; c++) wait (ch_checked[c] == it);
      checks++;
      if (n_block != VB * it) begin failures++; $display("FAIL: block count"); end
    end
    for (int c = 0; c < NCH; c++) begin checks += done_checks[c]; failures += done_fail[c]; end
    checks += 2;
    if (n_jump == 0)  begin failures++; $display("FAIL: no jump access"); end
    if (n_reuse == 0) begin failures++; $display("FAIL: no vertex block reuse"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired in iteration %0d, %0d blocks written", iter, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
