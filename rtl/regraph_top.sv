// regraph_top: the heterogeneous graph-processing accelerator.
//
// M_LITTLE Little pipelines (dense partitions) and N_BIG Big pipelines (sparse
// partitions) each own one memory channel: Little pipeline i uses channel i,
// Big pipeline j channel M_LITTLE + j. From its channel a pipeline reads edges
// (edge read port) and source properties (property read port). The Little
// Merger adds the result blocks of all Little pipelines, the Big Merger those
// of all Big pipelines; the Apply stage turns both streams into new
// properties, reading out-degrees through two reserved read ports, and the
// Writer broadcasts every new block to the write port of every channel.
//
// The host (offline scheduler) supplies one task stream per pipeline. All
// pipelines of a cluster must receive the same sequence of partitions (a task
// with no edges where a pipeline has no share), because the mergers add their
// outputs block by block. Memory ports are valid/ready request channels with
// in-order responses; all addresses count 512-bit blocks. prop_rd_base is the
// current property array, prop_wr_base the array being produced (the host
// swaps them between iterations), deg_base the out-degree array.
// The ev_* outputs pulse when the named mechanism acts, for observation.
// The composition is the paper's; the port protocol and the default 7 + 7
// pipelines (the best U280 mix the paper reports, e.g. 7L7B) are the paper's
// numbers carried into this design's interface.
module regraph_top
  import regraph_pkg::*;
#(
  parameter int unsigned M_LITTLE     = 7,
  parameter int unsigned N_BIG        = 7,
  parameter int unsigned GATHER_WORDS = 32768,
  parameter int unsigned BUF_BLOCKS   = 512,
  localparam int unsigned NCH         = M_LITTLE + N_BIG
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  addr_t                 prop_rd_base,
  input  addr_t                 prop_wr_base,
  input  addr_t                 deg_base,
  // tasks
  input  logic  [M_LITTLE-1:0]  l_task_valid,
  output logic  [M_LITTLE-1:0]  l_task_ready,
  input  task_t [M_LITTLE-1:0]  l_task,
  input  logic  [N_BIG-1:0]     b_task_valid,
  output logic  [N_BIG-1:0]     b_task_ready,
  input  task_t [N_BIG-1:0]     b_task,
  // per-channel edge read ports
  output logic  [NCH-1:0]       e_req_valid,
  input  logic  [NCH-1:0]       e_req_ready,
  output addr_t [NCH-1:0]       e_req_addr,
  input  logic  [NCH-1:0]       e_rsp_valid,
  output logic  [NCH-1:0]       e_rsp_ready,
  input  blk_t  [NCH-1:0]       e_rsp_data,
  // per-channel property read ports
  output logic  [NCH-1:0]       p_req_valid,
  input  logic  [NCH-1:0]       p_req_ready,
  output addr_t [NCH-1:0]       p_req_addr,
  input  logic  [NCH-1:0]       p_rsp_valid,
  output logic  [NCH-1:0]       p_rsp_ready,
  input  blk_t  [NCH-1:0]       p_rsp_data,
  // per-channel write ports (address and data shared)
  output logic  [NCH-1:0]       w_valid,
  input  logic  [NCH-1:0]       w_ready,
  output addr_t                 w_addr,
  output blk_t                  w_data,
  // Apply out-degree read ports (0: Little side, 1: Big side)
  output logic  [1:0]           a_req_valid,
  input  logic  [1:0]           a_req_ready,
  output addr_t [1:0]           a_req_addr,
  input  logic  [1:0]           a_rsp_valid,
  output logic  [1:0]           a_rsp_ready,
  input  blk_t  [1:0]           a_rsp_data,
  // observation
  output logic  [M_LITTLE-1:0]  ev_jump,
  output logic  [M_LITTLE-1:0]  ev_switch,
  output logic  [N_BIG-1:0]     ev_reuse,
  output logic  [N_BIG-1:0]     ev_conflict,
  output logic                  ev_contend,
  output logic                  ev_block
);
  logic    [M_LITTLE-1:0] l_res_valid, l_res_ready, l_res_last;
  result_t [M_LITTLE-1:0] l_res;
  logic    [N_BIG-1:0]    b_res_valid, b_res_ready, b_res_last;
  result_t [N_BIG-1:0]    b_res;

  for (genvar i = 0; i < M_LITTLE; i++) begin : g_little
    little_pipeline #(.GATHER_WORDS(GATHER_WORDS), .BUF_BLOCKS(BUF_BLOCKS)) u_lp (
      .clk, .rst_n, .prop_base(prop_rd_base),
      .task_valid(l_task_valid[i]), .task_ready(l_task_ready[i]), .task_i(l_task[i]),
      .e_req_valid(e_req_valid[i]), .e_req_ready(e_req_ready[i]), .e_req_addr(e_req_addr[i]),
      .e_rsp_valid(e_rsp_valid[i]), .e_rsp_ready(e_rsp_ready[i]), .e_rsp_data(e_rsp_data[i]),
      .p_req_valid(p_req_valid[i]), .p_req_ready(p_req_ready[i]), .p_req_addr(p_req_addr[i]),
      .p_rsp_valid(p_rsp_valid[i]), .p_rsp_ready(p_rsp_ready[i]), .p_rsp_data(p_rsp_data[i]),
      .res_valid(l_res_valid[i]), .res_ready(l_res_ready[i]), .res_o(l_res[i]),
      .res_last(l_res_last[i]),
      .ev_jump(ev_jump[i]), .ev_switch(ev_switch[i]));
  end

  for (genvar j = 0; j < N_BIG; j++) begin : g_big
    localparam int unsigned C = M_LITTLE + j;
    big_pipeline #(.GATHER_WORDS(GATHER_WORDS)) u_bp (
      .clk, .rst_n, .prop_base(prop_rd_base),
      .task_valid(b_task_valid[j]), .task_ready(b_task_ready[j]), .task_i(b_task[j]),
      .e_req_valid(e_req_valid[C]), .e_req_ready(e_req_ready[C]), .e_req_addr(e_req_addr[C]),
      .e_rsp_valid(e_rsp_valid[C]), .e_rsp_ready(e_rsp_ready[C]), .e_rsp_data(e_rsp_data[C]),
      .p_req_valid(p_req_valid[C]), .p_req_ready(p_req_ready[C]), .p_req_addr(p_req_addr[C]),
      .p_rsp_valid(p_rsp_valid[C]), .p_rsp_ready(p_rsp_ready[C]), .p_rsp_data(p_rsp_data[C]),
      .res_valid(b_res_valid[j]), .res_ready(b_res_ready[j]), .res_o(b_res[j]),
      .res_last(b_res_last[j]),
      .ev_reuse(ev_reuse[j]), .ev_conflict(ev_conflict[j]));
  end

  logic    [1:0] m_valid, m_ready;
  result_t [1:0] m_res;

  cluster_merger #(.K(M_LITTLE)) u_little_merger (
    .clk, .rst_n,
    .in_valid(l_res_valid), .in_ready(l_res_ready), .in_res(l_res), .in_last(l_res_last),
    .out_valid(m_valid[0]), .out_ready(m_ready[0]), .out_res(m_res[0]), .out_last());

  cluster_merger #(.K(N_BIG)) u_big_merger (
    .clk, .rst_n,
    .in_valid(b_res_valid), .in_ready(b_res_ready), .in_res(b_res), .in_last(b_res_last),
    .out_valid(m_valid[1]), .out_ready(m_ready[1]), .out_res(m_res[1]), .out_last());

  logic    ap_valid, ap_ready;
  result_t ap_res;

  apply_module u_apply (
    .clk, .rst_n, .deg_base,
    .in_valid(m_valid), .in_ready(m_ready), .in_res(m_res),
    .mem_req_valid(a_req_valid), .mem_req_ready(a_req_ready), .mem_req_addr(a_req_addr),
    .mem_rsp_valid(a_rsp_valid), .mem_rsp_ready(a_rsp_ready), .mem_rsp_data(a_rsp_data),
    .out_valid(ap_valid), .out_ready(ap_ready), .out_res(ap_res), .ev_contend);

  writer #(.NCH(NCH)) u_writer (
    .clk, .rst_n, .wr_base(prop_wr_base),
    .in_valid(ap_valid), .in_ready(ap_ready), .in_res(ap_res),
    .w_valid, .w_ready, .w_addr, .w_data, .ev_block);
endmodule
