// vertex_loader: source-property access of a Big pipeline.
//
// For each set of eight source IDs it returns the eight 32-bit source
// properties, without caching or prefetching: it only avoids re-requesting the
// block it requested last, and otherwise hides memory latency by decoupling
// request issue from response use.
//   Decoder: block index = src / 16, offset = src % 16 (32-bit properties in
//     512-bit blocks). The index/offset set is pushed to both halves below.
//   Request sending: each lane's index is compared with the last requested
//     index; matching lanes need no request. Because source IDs ascend, the
//     matching lanes form a prefix, whose length (leading-match count) is where
//     the request generator starts; it then issues one request per cycle for
//     the remaining lanes, and the property reader writes each returned block
//     into the stream (FIFO) of the lane that asked for it.
//   Response processing: the same comparison, against its own copy of the last
//     index, selects per lane either the kept last property block or the head
//     of that lane's stream; the byte selector picks the property at the
//     offset. The last index and block are then replaced by those of the last
//     valid lane of the set.
// The first set of a task forgets the last index (source IDs restart).
// Throughput: one set per cycle when every lane hits; otherwise one cycle per
// request. Up to OUTSTANDING requests may be in flight.
// The structure follows the paper's figure of the Vertex Loader; stream depths,
// the restart rule and the handshakes are this design's choices.
module vertex_loader
  import regraph_pkg::*;
#(
  parameter int unsigned OUTSTANDING = 32,
  parameter int unsigned LANE_DEPTH  = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  addr_t                      prop_base,   // block address of the property array
  // source IDs
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic                       in_first,
  input  logic [N_LANES-1:0]         in_mask,
  input  vid_t [N_LANES-1:0]         in_src,
  // property channel read port
  output logic                       mem_req_valid,
  input  logic                       mem_req_ready,
  output addr_t                      mem_req_addr,
  input  logic                       mem_rsp_valid,
  output logic                       mem_rsp_ready,
  input  blk_t                       mem_rsp_data,
  // source properties
  output logic                       out_valid,
  input  logic                       out_ready,
  output prop_t [N_LANES-1:0]        out_prop,
  // event counts for observation
  output logic                       ev_reuse    // a lane reused the last property block
);
  localparam int unsigned LW = $clog2(N_LANES);

  typedef struct packed {
    logic                       first;
    logic [N_LANES-1:0]         mask;
    addr_t [N_LANES-1:0]        idx;
    logic [N_LANES-1:0][3:0]    off;
  } meta_t;

  // ---------------- decoder ----------------
  meta_t dec;
  always_comb begin
    dec.first = in_first;
    dec.mask  = in_mask;
    for (int j = 0; j < N_LANES; j++) begin
      dec.idx[j] = addr_t'(in_src[j] >> 4);
      dec.off[j] = in_src[j][3:0];
    end
  end

  logic  rq_in_ready, rs_in_ready;
  logic  rq_valid, rq_pop, rs_valid, rs_pop;
  meta_t rq, rs;

  assign in_ready = rq_in_ready && rs_in_ready;

  stream_fifo #(.W($bits(meta_t)), .DEPTH(4)) u_rq (
    .clk, .rst_n,
    .in_valid(in_valid && rs_in_ready), .in_ready(rq_in_ready), .in_data(dec),
    .out_valid(rq_valid), .out_ready(rq_pop), .out_data(rq), .count());

  stream_fifo #(.W($bits(meta_t)), .DEPTH(OUTSTANDING)) u_rs (
    .clk, .rst_n,
    .in_valid(in_valid && rq_in_ready), .in_ready(rs_in_ready), .in_data(dec),
    .out_valid(rs_valid), .out_ready(rs_pop), .out_data(rs), .count());

  // ---------------- request sending pipeline ----------------
  addr_t              rq_last;
  logic               rq_last_v;
  logic [N_LANES-1:0] rq_need;
  logic [LW:0]        lzc, cur, ptr;
  logic               started;
  logic               tag_in_ready;
  logic [LW-1:0]      last_lane_rq;
  logic               any_rq;

  always_comb begin
    rq_need = '0;
    lzc     = '0;
    for (int j = 0; j < N_LANES; j++)
      rq_need[j] = rq.mask[j] && !(rq_last_v && !rq.first && rq.idx[j] == rq_last);
    // leading-match counter: length of the run of lanes, from lane 0, that
    // need no request
    for (int j = 0; j < N_LANES; j++)
      if (!rq_need[j] && lzc == (LW+1)'(j)) lzc = (LW+1)'(j + 1);
    cur = started ? ptr : lzc;
    last_lane_rq = '0;
    any_rq = 1'b0;
    for (int j = 0; j < N_LANES; j++)
      if (rq.mask[j]) begin last_lane_rq = LW'(j); any_rq = 1'b1; end
  end

  logic               issue, rest_empty, lane_need;
  logic [N_LANES-1:0] beyond;
  always_comb begin
    beyond = '0;
    for (int j = 0; j < N_LANES; j++) beyond[j] = ((LW+1)'(j) > cur) && rq_need[j];
    lane_need     = (cur < (LW+1)'(N_LANES)) && rq_need[cur[LW-1:0]];
    rest_empty    = (beyond == '0);
    mem_req_valid = rq_valid && lane_need && tag_in_ready;
    mem_req_addr  = prop_base + rq.idx[cur[LW-1:0]];
    issue         = mem_req_valid && mem_req_ready;
    // pop the set once nothing is left to request
    rq_pop        = rq_valid && (lane_need ? (issue && rest_empty) : rest_empty);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_last   <= '0;
      rq_last_v <= 1'b0;
      started   <= 1'b0;
      ptr       <= '0;
    end else begin
      if (rq_pop) begin
        started <= 1'b0;
        if (any_rq) begin
          rq_last   <= rq.idx[last_lane_rq];
          rq_last_v <= 1'b1;
        end
      end else if (rq_valid) begin
        started <= 1'b1;
        if (!lane_need || issue) ptr <= cur + 1'b1;
        else                     ptr <= cur;
      end
    end
  end

  // ---------------- property reader ----------------
  logic               tag_valid;
  logic [LW-1:0]      tag;
  logic [N_LANES-1:0] ln_in_ready, ln_valid, ln_pop;
  blk_t [N_LANES-1:0] ln_data;

  stream_fifo #(.W(LW), .DEPTH(OUTSTANDING)) u_tag (
    .clk, .rst_n,
    .in_valid(issue), .in_ready(tag_in_ready), .in_data(cur[LW-1:0]),
    .out_valid(tag_valid), .out_ready(mem_rsp_valid && mem_rsp_ready), .out_data(tag), .count());

  assign mem_rsp_ready = tag_valid && ln_in_ready[tag];

  for (genvar j = 0; j < N_LANES; j++) begin : g_lane
    stream_fifo #(.W(BLK_W), .DEPTH(LANE_DEPTH)) u_ln (
      .clk, .rst_n,
      .in_valid(mem_rsp_valid && tag_valid && tag == LW'(j)), .in_ready(ln_in_ready[j]),
      .in_data(mem_rsp_data),
      .out_valid(ln_valid[j]), .out_ready(ln_pop[j]), .out_data(ln_data[j]), .count());
  end

  // ---------------- response processing pipeline ----------------
  addr_t              rs_last;
  blk_t               rs_last_blk;
  logic               rs_last_v;
  logic [N_LANES-1:0] rs_need, rs_hit;
  blk_t [N_LANES-1:0] sel_blk;
  logic               have_all, rs_fire, any_rs;
  logic [LW-1:0]      last_lane_rs;

  always_comb begin
    have_all     = 1'b1;
    last_lane_rs = '0;
    any_rs       = 1'b0;
    for (int j = 0; j < N_LANES; j++) begin
      rs_hit[j]  = rs.mask[j] && rs_last_v && !rs.first && rs.idx[j] == rs_last;
      rs_need[j] = rs.mask[j] && !rs_hit[j];
      if (rs_need[j] && !ln_valid[j]) have_all = 1'b0;
      sel_blk[j] = rs_need[j] ? ln_data[j] : rs_last_blk;
      if (rs.mask[j]) begin last_lane_rs = LW'(j); any_rs = 1'b1; end
    end
    rs_fire = rs_valid && have_all && (!out_valid || out_ready);
    rs_pop  = rs_fire;
    ln_pop  = rs_fire ? rs_need : '0;
  end

  assign ev_reuse = rs_fire && (rs_hit != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_last     <= '0;
      rs_last_blk <= '0;
      rs_last_v   <= 1'b0;
      out_valid   <= 1'b0;
      out_prop    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rs_fire) begin
        out_valid <= 1'b1;
        for (int j = 0; j < N_LANES; j++)
          out_prop[j] <= rs.mask[j] ? sel_blk[j][32*rs.off[j] +: 32] : '0;
        if (any_rs) begin
          rs_last     <= rs.idx[last_lane_rs];
          rs_last_blk <= sel_blk[last_lane_rs];
          rs_last_v   <= 1'b1;
        end
      end
    end
  end
endmodule
