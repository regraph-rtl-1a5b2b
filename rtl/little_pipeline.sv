// little_pipeline: Scatter and Gather for dense partitions.
//
// Burst reader -> (source IDs) Ping-Pong Buffer -> 8 Scatter PEs -> 8 Gather
// PEs -> Merger. The destination IDs travel beside the Ping-Pong Buffer in a
// FIFO and meet the properties again at the Scatter PEs. Update tuples are
// dispatched statically: the update of edge lane j always goes to Gather PE j,
// so each Gather PE buffers the whole partition (GATHER_WORDS*2 vertices from
// the task's dst_base) and the Merger adds the eight buffers when the task is
// done. One edge set (eight edges) per cycle when the properties are on chip.
// A pipeline processes one partition per task: after the last edge set it
// waits for the Gather PEs to settle, flushes them and streams the merged
// result blocks out (GATHER_WORDS/8 blocks), then starts the next task, whose
// edges may already be buffered. Ports: one task stream, the edge channel read
// port, the property channel read port and the result stream.
// The structure is the paper's; the task/flush sequencing is this design's.
module little_pipeline
  import regraph_pkg::*;
#(
  parameter int unsigned GATHER_WORDS = 32768,
  parameter int unsigned BUF_BLOCKS   = 512
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
  output logic    ev_jump,
  output logic    ev_switch
);
  localparam int unsigned AW = $clog2(GATHER_WORDS);

  typedef struct packed {
    logic               last;
    logic [N_LANES-1:0] mask;
    vid_t [N_LANES-1:0] dst;
  } dq_t;

  typedef enum logic [1:0] {S_RUN, S_WAIT, S_DRAIN} state_e;
  state_e state;

  // task bookkeeping
  logic  br_task_ready, tq_in_ready, tq_valid, tq_pop;
  vid_t  cur_base;
  assign task_ready = br_task_ready && tq_in_ready;

  stream_fifo #(.W(VID_W), .DEPTH(4)) u_tq (
    .clk, .rst_n,
    .in_valid(task_valid && task_ready), .in_ready(tq_in_ready), .in_data(task_i.dst_base),
    .out_valid(tq_valid), .out_ready(tq_pop), .out_data(cur_base), .count());

  // burst read
  logic      set_valid, set_ready;
  edge_set_t set_w;
  burst_reader u_br (
    .clk, .rst_n,
    .task_valid(task_valid && tq_in_ready), .task_ready(br_task_ready), .task_i,
    .mem_req_valid(e_req_valid), .mem_req_ready(e_req_ready), .mem_req_addr(e_req_addr),
    .mem_rsp_valid(e_rsp_valid), .mem_rsp_ready(e_rsp_ready), .mem_rsp_data(e_rsp_data),
    .set_valid, .set_ready, .set_o(set_w));

  // fork: sources to the ping-pong buffer, destinations to the side FIFO
  logic pp_in_ready, dq_in_ready, pp_out_valid, dq_out_valid, join_fire;
  prop_t [N_LANES-1:0] src_prop;
  dq_t   dq_in, dq_out;
  assign set_ready    = pp_in_ready && dq_in_ready;
  assign dq_in.last   = set_w.last;
  assign dq_in.mask   = set_w.valid;
  assign dq_in.dst    = set_w.dst;

  pingpong_buffer #(.BUF_BLOCKS(BUF_BLOCKS)) u_ppb (
    .clk, .rst_n, .prop_base,
    .in_valid(set_valid && dq_in_ready), .in_ready(pp_in_ready),
    .in_first(set_w.first), .in_mask(set_w.valid), .in_src(set_w.src),
    .mem_req_valid(p_req_valid), .mem_req_ready(p_req_ready), .mem_req_addr(p_req_addr),
    .mem_rsp_valid(p_rsp_valid), .mem_rsp_ready(p_rsp_ready), .mem_rsp_data(p_rsp_data),
    .out_valid(pp_out_valid), .out_ready(join_fire), .out_prop(src_prop),
    .ev_jump, .ev_switch);

  stream_fifo #(.W($bits(dq_t)), .DEPTH(16)) u_dq (
    .clk, .rst_n,
    .in_valid(set_valid && pp_in_ready), .in_ready(dq_in_ready), .in_data(dq_in),
    .out_valid(dq_out_valid), .out_ready(join_fire), .out_data(dq_out), .count());

  // scatter + static dispatch to gather
  logic    [N_LANES-1:0] g_ready, g_idle, g_out_valid, g_out_last, upd_v;
  update_t [N_LANES-1:0] upd;
  word_t   [N_LANES-1:0] g_out;
  logic                  flush, m_in_ready;

  assign join_fire = (state == S_RUN) && pp_out_valid && dq_out_valid && tq_valid && (&g_ready);

  for (genvar j = 0; j < N_LANES; j++) begin : g_pe
    scatter_pe u_spe (
      .edge_valid(dq_out.mask[j]), .edge_dst(dq_out.dst[j]), .edge_prop('0),
      .src_prop(src_prop[j]), .dst_base(cur_base),
      .upd_valid(upd_v[j]), .upd(upd[j]));
    gather_pe #(.DEPTH_WORDS(GATHER_WORDS)) u_gpe (
      .clk, .rst_n,
      .upd_valid(join_fire && upd_v[j]), .upd_ready(g_ready[j]),
      .upd_addr(upd[j].dst[AW:0]), .upd_val(upd[j].val),
      .flush, .idle(g_idle[j]),
      .out_valid(g_out_valid[j]), .out_ready(m_in_ready), .out_data(g_out[j]),
      .out_last(g_out_last[j]));
  end

  assign flush = (state == S_WAIT) && (&g_idle);

  pipe_merger u_merge (
    .clk, .rst_n, .blk_base(addr_t'(cur_base >> 4)),
    .in_valid(g_out_valid), .in_ready(m_in_ready), .in_data(g_out), .in_last(g_out_last[0]),
    .out_valid(res_valid), .out_ready(res_ready), .out_res(res_o), .out_last(res_last));

  assign tq_pop = (state == S_DRAIN) && res_valid && res_ready && res_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_RUN;
    else case (state)
      S_RUN:   if (join_fire && dq_out.last) state <= S_WAIT;
      S_WAIT:  if (flush) state <= S_DRAIN;
      default: if (tq_pop) state <= S_RUN;
    endcase
  end

  // every destination must fall inside the partition buffered by the PEs
  for (genvar j = 0; j < N_LANES; j++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      join_fire && upd_v[j] |-> upd[j].dst < vid_t'(2*GATHER_WORDS));
  end
endmodule
