// big_pipeline: Scatter and Gather for sparse partitions.
//
// Burst reader -> (source IDs) Vertex Loader -> 8 Scatter PEs -> butterfly
// Data Router -> 8 Gather PEs. The destination IDs travel beside the Vertex
// Loader in a FIFO. The router sends the update of relative destination d to
// Gather PE d % 8, where it is buffered at d / 8, so the eight PEs hold
// disjoint vertices and together buffer 8*2*GATHER_WORDS vertices: eight
// partitions per task, and no merger is needed. Because the router may take
// the lanes of one edge set in different cycles, a mask remembers which lanes
// have been accepted.
// After the last edge set of a task has entered the router, the pipeline waits
// until the router is empty and the Gather PEs have settled, flushes them, and
// packs the eight words read in lockstep into one result block (PE k, half h
// holds vertex 16w + 8h + k of word w), GATHER_WORDS blocks per task. Then the
// next task starts. One edge set per cycle when every source hits the last
// fetched block and the router has no conflicts.
// The structure is the paper's; the interleaved vertex-to-PE mapping is taken
// from the paper's running example; sequencing is this design's.
module big_pipeline
  import regraph_pkg::*;
#(
  parameter int unsigned GATHER_WORDS = 32768
) (
  input  logic    clk,
  input  logic    rst_n,
  input  addr_t   prop_base,
  input  logic    task_valid,
  output logic    task_ready,
  input  task_t   task_i,
  output logic    e_req_valid,
  input  logic    e_req_ready,
  output addr_t   e_req_addr,
  input  logic    e_rsp_valid,
  output logic    e_rsp_ready,
  input  blk_t    e_rsp_data,
  output logic    p_req_valid,
  input  logic    p_req_ready,
  output addr_t   p_req_addr,
  input  logic    p_rsp_valid,
  output logic    p_rsp_ready,
  input  blk_t    p_rsp_data,
  output logic    res_valid,
  input  logic    res_ready,
  output result_t res_o,
  output logic    res_last,
  output logic    ev_reuse,
  output logic    ev_conflict
);
  localparam int unsigned AW = $clog2(GATHER_WORDS);
  localparam int unsigned LW = $clog2(N_LANES);

  typedef struct packed {
    logic               last;
    logic [N_LANES-1:0] mask;
    vid_t [N_LANES-1:0] dst;
  } dq_t;

  typedef enum logic [1:0] {S_RUN, S_WAIT, S_DRAIN} state_e;
  state_e state;

  logic  br_task_ready, tq_in_ready, tq_valid, tq_pop;
  vid_t  cur_base;
  assign task_ready = br_task_ready && tq_in_ready;

  stream_fifo #(.W(VID_W), .DEPTH(4)) u_tq (
    .clk, .rst_n,
    .in_valid(task_valid && task_ready), .in_ready(tq_in_ready), .in_data(task_i.dst_base),
    .out_valid(tq_valid), .out_ready(tq_pop), .out_data(cur_base), .count());

  logic      set_valid, set_ready;
  edge_set_t set_w;
  burst_reader u_br (
    .clk, .rst_n,
    .task_valid(task_valid && tq_in_ready), .task_ready(br_task_ready), .task_i,
    .mem_req_valid(e_req_valid), .mem_req_ready(e_req_ready), .mem_req_addr(e_req_addr),
    .mem_rsp_valid(e_rsp_valid), .mem_rsp_ready(e_rsp_ready), .mem_rsp_data(e_rsp_data),
    .set_valid, .set_ready, .set_o(set_w));

  logic vl_in_ready, dq_in_ready, vl_out_valid, dq_out_valid, set_done;
  prop_t [N_LANES-1:0] src_prop;
  dq_t   dq_in, dq_out;
  assign set_ready  = vl_in_ready && dq_in_ready;
  assign dq_in.last = set_w.last;
  assign dq_in.mask = set_w.valid;
  assign dq_in.dst  = set_w.dst;

  vertex_loader u_vl (
    .clk, .rst_n, .prop_base,
    .in_valid(set_valid && dq_in_ready), .in_ready(vl_in_ready),
    .in_first(set_w.first), .in_mask(set_w.valid), .in_src(set_w.src),
    .mem_req_valid(p_req_valid), .mem_req_ready(p_req_ready), .mem_req_addr(p_req_addr),
    .mem_rsp_valid(p_rsp_valid), .mem_rsp_ready(p_rsp_ready), .mem_rsp_data(p_rsp_data),
    .out_valid(vl_out_valid), .out_ready(set_done), .out_prop(src_prop),
    .ev_reuse);

  stream_fifo #(.W($bits(dq_t)), .DEPTH(64)) u_dq (
    .clk, .rst_n,
    .in_valid(set_valid && vl_in_ready), .in_ready(dq_in_ready), .in_data(dq_in),
    .out_valid(dq_out_valid), .out_ready(set_done), .out_data(dq_out), .count());

  // scatter
  logic    [N_LANES-1:0] upd_v, sent, r_in_valid, r_in_ready;
  update_t [N_LANES-1:0] upd;
  logic                  have_set;

  for (genvar j = 0; j < N_LANES; j++) begin : g_spe
    scatter_pe u_spe (
      .edge_valid(dq_out.mask[j]), .edge_dst(dq_out.dst[j]), .edge_prop('0),
      .src_prop(src_prop[j]), .dst_base(cur_base),
      .upd_valid(upd_v[j]), .upd(upd[j]));
  end

  assign have_set   = (state == S_RUN) && vl_out_valid && dq_out_valid && tq_valid;
  assign r_in_valid = have_set ? (upd_v & ~sent) : '0;
  assign set_done   = have_set && (((sent | (r_in_valid & r_in_ready)) & upd_v) == upd_v);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        sent <= '0;
    else if (set_done) sent <= '0;
    else               sent <= sent | (r_in_valid & r_in_ready);
  end

  // router
  logic    [N_LANES-1:0] r_out_valid, g_ready;
  update_t [N_LANES-1:0] r_out;
  logic                  r_empty;
  data_router u_router (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_upd(upd),
    .out_valid(r_out_valid), .out_ready(g_ready), .out_upd(r_out),
    .empty(r_empty), .ev_conflict);

  // gather
  logic  [N_LANES-1:0] g_idle, g_out_valid, g_out_last;
  word_t [N_LANES-1:0] g_out;
  logic                flush, pack_ready;

  for (genvar k = 0; k < N_LANES; k++) begin : g_gpe
    gather_pe #(.DEPTH_WORDS(GATHER_WORDS)) u_gpe (
      .clk, .rst_n,
      .upd_valid(r_out_valid[k]), .upd_ready(g_ready[k]),
      .upd_addr(r_out[k].dst[AW+LW:LW]), .upd_val(r_out[k].val),
      .flush, .idle(g_idle[k]),
      .out_valid(g_out_valid[k]), .out_ready(pack_ready), .out_data(g_out[k]),
      .out_last(g_out_last[k]));
  end

  assign flush = (state == S_WAIT) && r_empty && (&g_idle) && (r_out_valid == '0);

  // pack the eight exclusive buffers into result blocks
  addr_t wcnt;
  assign pack_ready = (&g_out_valid) && (!res_valid || res_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_o     <= '0;
      res_last  <= 1'b0;
      wcnt      <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (pack_ready) begin
        res_valid <= 1'b1;
        res_o.blk <= addr_t'(cur_base >> 4) + wcnt;
        for (int k = 0; k < N_LANES; k++) begin
          res_o.val[k]           <= g_out[k][31:0];
          res_o.val[N_LANES + k] <= g_out[k][63:32];
        end
        res_last <= g_out_last[0];
        wcnt     <= g_out_last[0] ? '0 : wcnt + 1;
      end
    end
  end

  assign tq_pop = (state == S_DRAIN) && res_valid && res_ready && res_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_RUN;
    else case (state)
      S_RUN:   if (set_done && dq_out.last) state <= S_WAIT;
      S_WAIT:  if (flush) state <= S_DRAIN;
      default: if (tq_pop) state <= S_RUN;
    endcase
  end

  for (genvar j = 0; j < N_LANES; j++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      r_in_valid[j] |-> upd[j].dst < vid_t'(2*N_LANES*GATHER_WORDS));
  end
endmodule
