// tb_regraph_full: the end-to-end test of tb_regraph_top with the accelerator
// at its default size: 7 Little and 7 Big pipelines, 65,536-vertex Gather
// buffers, 32 KB ping/pong buffers. The graph has one dense partition of
// 65,536 vertices and one merged sparse partition of 524,288 vertices, so one
// iteration writes 36,864 property blocks to each of the 14 channels.
//
// Builds a graph of NLP dense partitions (U vertices each, Little cluster)
// followed by one merged sparse partition (8*U vertices, Big cluster), lays
// out every channel (property array, output array, out-degrees, and the
// channel's own edge sub-lists, each sorted by source), runs one PageRank
// iteration, and compares the property array written to every channel with a
// reference computed here from the edge list. Sources are drawn 60% from a
// small hot range so that both block reuse in the Vertex Loader and jumps in
// the Ping-Pong Buffer occur; one Little pipeline gets an empty task. Every
// memory port stalls at random. It also counts how often each mechanism acted
// (buffer switch, jump access, block reuse, router conflict, Apply contention,
// memory back-pressure, empty task) and fails if one never did.
module tb_regraph_full;
  import regraph_pkg::*;

  localparam int unsigned M    = 7;
  localparam int unsigned N    = 7;
  localparam int unsigned GW   = 32768;  // Gather PE words (default)
  localparam int unsigned BB   = 512;    // ping/pong buffer blocks (default)
  localparam int unsigned NLP  = 1;      // dense partitions
  localparam int unsigned E_D  = 6000;   // edges per dense partition
  localparam int unsigned E_S  = 6000;   // edges of the sparse partition
  localparam int unsigned HOT  = 20000;  // hot source range
  localparam int unsigned WDOG = 3000000;

  localparam int unsigned NCH  = M + N;
  localparam int unsigned U    = 2 * GW;
  localparam int unsigned UB   = 8 * U;
  localparam int unsigned V    = NLP * U + UB;
  localparam int unsigned VB   = V / 16;
  localparam int unsigned PROP_RD = 0;
  localparam int unsigned PROP_WR = VB;
  localparam int unsigned DEG     = 2 * VB;
  localparam int unsigned EDGE    = 3 * VB;
  localparam int unsigned MAXEB   = (NLP * E_D + E_S) / 8 + 4 * NLP + 8;
  localparam int unsigned WORDS   = EDGE + MAXEB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- graph and reference ----------------
  int unsigned prop [V];
  int unsigned deg  [V];
  int unsigned tsum [V];
  int unsigned expv [V];
  // per pipeline: task list
  task_t tasks_l [M][NLP];
  task_t task_b  [N];
  int unsigned nblk_ch [NCH];
  blk_t  eimg [NCH][MAXEB];
  logic  img_ready = 1'b0;
  int    n_empty = 0;

  function automatic int unsigned pick_src();
    if (($urandom % 10) < 6) return $urandom % HOT;
    return $urandom % V;
  endfunction

  // sort helper (insertion sort on parallel arrays)
  task automatic sort_edges(ref int unsigned s[], ref int unsigned d[]);
    for (int i = 1; i < s.size(); i++) begin
      automatic int unsigned ks = s[i], kd = d[i];
      automatic int j = i - 1;
      while (j >= 0 && s[j] > ks) begin
        s[j+1] = s[j]; d[j+1] = d[j]; j--;
      end
      s[j+1] = ks; d[j+1] = kd;
    end
  endtask

  // place edges [lo,hi) of a sorted list into channel c, return the task
  function automatic task_t place(int c, ref int unsigned s[], ref int unsigned d[],
                                  input int lo, input int hi, input int unsigned dst_base);
    task_t t;
    t.edge_base = addr_t'(EDGE + nblk_ch[c]);
    t.num_edges = 32'(hi - lo);
    t.dst_base  = vid_t'(dst_base);
    for (int e = lo; e < hi; e++) begin
      automatic int k = e - lo;
      eimg[c][nblk_ch[c] + k/8][64*(k%8) +: 64] = {32'(d[e]), 32'(s[e])};
    end
    nblk_ch[c] += (hi - lo + 7) / 8;
    return t;
  endfunction

  initial begin
    automatic int unsigned s[], d[];
    void'($urandom(7));
    for (int c = 0; c < NCH; c++) begin
      nblk_ch[c] = 0;
      for (int b = 0; b < MAXEB; b++) eimg[c][b] = '0;
    end
    for (int v = 0; v < V; v++) begin
      prop[v] = $urandom % (1 << 20);
      deg[v]  = ($urandom % 9 == 0) ? 0 : 1 + $urandom % 20;
      tsum[v] = 0;
    end
    // dense partitions
    for (int p = 0; p < NLP; p++) begin
      automatic int cut [M+1];
      s = new[E_D]; d = new[E_D];
      for (int e = 0; e < E_D; e++) begin
        s[e] = pick_src();
        d[e] = p * U + $urandom % U;
        tsum[d[e]] += prop[s[e]];
      end
      sort_edges(s, d);
      cut[0] = 0; cut[M] = E_D;
      for (int i = 1; i < M; i++) cut[i] = (E_D * i) / M + ($urandom % 16);
      if (p == NLP - 1) cut[M-1] = cut[M];      // last pipeline: empty task
      for (int i = 0; i < M; i++) begin
        tasks_l[i][p] = place(i, s, d, cut[i], cut[i+1], p * U);
        if (cut[i] == cut[i+1]) n_empty++;
      end
    end
    // merged sparse partition
    begin
      automatic int cut [N+1];
      s = new[E_S]; d = new[E_S];
      for (int e = 0; e < E_S; e++) begin
        s[e] = pick_src();
        d[e] = NLP * U + $urandom % UB;
        tsum[d[e]] += prop[s[e]];
      end
      sort_edges(s, d);
      cut[0] = 0; cut[N] = E_S;
      for (int i = 1; i < N; i++) cut[i] = (E_S * i) / N + ($urandom % 16);
      for (int j = 0; j < N; j++) task_b[j] = place(M + j, s, d, cut[j], cut[j+1], NLP * U);
    end
    for (int v = 0; v < V; v++) begin
      automatic logic [63:0] x = ((64'(108) * 64'(tsum[v])) >> 7) << 16;
      expv[v] = (deg[v] == 0) ? 0 : 32'((x / 64'(deg[v])) >> 16);
    end
    img_ready = 1'b1;
  end

  // ---------------- DUT and memories ----------------
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

  regraph_top dut (
    .clk, .rst_n,
    .prop_rd_base(addr_t'(PROP_RD)), .prop_wr_base(addr_t'(PROP_WR)), .deg_base(addr_t'(DEG)),
    .l_task_valid, .l_task_ready, .l_task, .b_task_valid, .b_task_ready, .b_task,
    .e_req_valid, .e_req_ready, .e_req_addr, .e_rsp_valid, .e_rsp_ready, .e_rsp_data,
    .p_req_valid, .p_req_ready, .p_req_addr, .p_rsp_valid, .p_rsp_ready, .p_rsp_data,
    .w_valid, .w_ready, .w_addr, .w_data,
    .a_req_valid, .a_req_ready, .a_req_addr, .a_rsp_valid, .a_rsp_ready, .a_rsp_data,
    .ev_jump, .ev_switch, .ev_reuse, .ev_conflict, .ev_contend, .ev_block);

  function automatic blk_t prop_blk(int b);
    blk_t x;
    for (int l = 0; l < 16; l++) x[32*l +: 32] = prop[16*b + l];
    return x;
  endfunction

  function automatic blk_t deg_blk(int b);
    blk_t x;
    for (int l = 0; l < 16; l++) x[32*l +: 32] = deg[16*b + l];
    return x;
  endfunction

  logic all_written = 1'b0;
  int   ch_fail [NCH];
  int   ch_checks [NCH];
  int   n_mem_stall [NCH+2];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    hbm_model #(.WORDS(WORDS), .NRD(2)) u_m (
      .clk, .rst_n,
      .req_valid({p_req_valid[c], e_req_valid[c]}), .req_ready({p_req_ready[c], e_req_ready[c]}),
      .req_addr({p_req_addr[c], e_req_addr[c]}),
      .rsp_valid({p_rsp_valid[c], e_rsp_valid[c]}), .rsp_ready({p_rsp_ready[c], e_rsp_ready[c]}),
      .rsp_data({p_rsp_data[c], e_rsp_data[c]}),
      .w_valid(w_valid[c]), .w_ready(w_ready[c]), .w_addr, .w_data);
    initial begin
      ch_fail[c] = 0; ch_checks[c] = 0;
      wait (img_ready);
      for (int b = 0; b < VB; b++) u_m.poke(PROP_RD + b, prop_blk(b));
      for (int b = 0; b < VB; b++) u_m.poke(PROP_WR + b, '1);
      for (int b = 0; b < MAXEB; b++) u_m.poke(EDGE + b, eimg[c][b]);
      wait (all_written);
      for (int b = 0; b < VB; b++) begin
        automatic blk_t got = u_m.peek(PROP_WR + b);
        for (int l = 0; l < 16; l++) begin
          ch_checks[c]++;
          if (got[32*l +: 32] != expv[16*b + l]) begin
            if (ch_fail[c] < 5)
              $display("MISMATCH ch%0d vertex %0d got %0d exp %0d", c, 16*b + l,
                       got[32*l +: 32], expv[16*b + l]);
            ch_fail[c]++;
          end
        end
      end
    end
    assign n_mem_stall[c] = u_m.n_stall;
  end

  for (genvar a = 0; a < 2; a++) begin : g_ap
    hbm_model #(.WORDS(WORDS), .NRD(1)) u_m (
      .clk, .rst_n,
      .req_valid(a_req_valid[a]), .req_ready(a_req_ready[a]), .req_addr(a_req_addr[a]),
      .rsp_valid(a_rsp_valid[a]), .rsp_ready(a_rsp_ready[a]), .rsp_data(a_rsp_data[a]),
      .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));
    initial begin
      wait (img_ready);
      for (int b = 0; b < VB; b++) u_m.poke(DEG + b, deg_blk(b));
    end
    assign n_mem_stall[NCH + a] = u_m.n_stall;
  end

  // ---------------- task drivers ----------------
  for (genvar i = 0; i < M; i++) begin : g_ltask
    initial begin
      l_task_valid[i] = 1'b0;
      l_task[i] = '0;
      wait (img_ready && rst_n);
      for (int p = 0; p < NLP; p++) begin
        @(negedge clk);
        l_task_valid[i] = 1'b1;
        l_task[i] = tasks_l[i][p];
        do @(posedge clk); while (!l_task_ready[i]);
        @(negedge clk);
        l_task_valid[i] = 1'b0;
      end
    end
  end
  for (genvar j = 0; j < N; j++) begin : g_btask
    initial begin
      b_task_valid[j] = 1'b0;
      b_task[j] = '0;
      wait (img_ready && rst_n);
      @(negedge clk);
      b_task_valid[j] = 1'b1;
      b_task[j] = task_b[j];
      do @(posedge clk); while (!b_task_ready[j]);
      @(negedge clk);
      b_task_valid[j] = 1'b0;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_jump = 0, n_switch = 0, n_reuse = 0, n_conflict = 0, n_contend = 0, n_block = 0;
  always @(posedge clk) if (rst_n) begin
    n_jump     <= n_jump + $countones(ev_jump);
    n_switch   <= n_switch + $countones(ev_switch);
    n_reuse    <= n_reuse + $countones(ev_reuse);
    n_conflict <= n_conflict + $countones(ev_conflict);
    n_contend  <= n_contend + (ev_contend ? 1 : 0);
    n_block    <= n_block + (ev_block ? 1 : 0);
  end

  task automatic count(string name, int n);
    checks++;
    $display("mechanism %-22s %0d", name, n);
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism %s never happened", name);
    end
  endtask

  initial begin
    automatic int stall_sum = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (n_block == VB);
    repeat (20) @(posedge clk);
    checks++;
    if (n_block != VB) begin failures++; $display("FAIL: %0d blocks written, %0d expected", n_block, VB); end
    all_written = 1'b1;
    repeat (2) @(posedge clk);
    for (int c = 0; c < NCH; c++) begin
      checks   += ch_checks[c];
      failures += ch_fail[c];
    end
    for (int c = 0; c < NCH + 2; c++) stall_sum += n_mem_stall[c];
    count("ping/pong switch", n_switch);
    count("jump access", n_jump);
    count("vertex block reuse", n_reuse);
    count("router conflict", n_conflict);
    count("apply contention", n_contend);
    count("memory back-pressure", stall_sum);
    count("empty task", n_empty);
    $display("one iteration: V=%0d vertices, %0d edges, %0d cycles", V, NLP*E_D + E_S, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired, %0d of %0d blocks written", n_block, VB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
