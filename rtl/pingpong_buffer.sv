// pingpong_buffer: source-property access of a Little pipeline.
//
// Dense partitions touch most source vertices, so instead of fetching single
// blocks the Little pipeline streams the property array into on-chip buffers
// and reads the properties from there. Every Scatter PE lane has its own ping
// buffer and pong buffer, each BUF_BLOCKS 512-bit blocks (32 KB, eight BRAMs
// cascaded to a 512-bit port); all lanes' copies are written together, so
// eight lanes can read in the same cycle.
//   Segment k of the property array (BUF_BLOCKS blocks, BUF_BLOCKS*16
//   vertices) lives in buffer k % 2 (ping for even, pong for odd).
//   buf wr idx: the segment being filled. The burst reader requests one block
//   per cycle and, once the segment is complete, increments buf wr idx, which
//   moves filling to the other buffer.
//   buf rd idx: src / (BUF_BLOCKS*16), the segment the current sources need.
//   Filling runs only while buf wr idx <= buf rd idx + 1, so the buffer being
//   read is never overwritten; reading a segment is enabled once it is older
//   than buf wr idx (fully loaded) and not yet overwritten.
//   Jump access: if the sources need a segment that is neither loaded nor
//   being loaded (the pipeline skips part of the array), buf wr idx is forced
//   to buf rd idx once the outstanding reads are in, so the skipped segments
//   are never fetched. The first set of every task does the same, which
//   resets the indices for a new task.
// Per edge set: stage A issues, per pass, the reads of every pending lane
// whose source lies in the lowest needed segment (a set that straddles a
// segment boundary takes two passes); stage B gets the blocks a cycle later,
// the byte selector picks the property at src % 16, and a completed set is
// queued for the Scatter PEs. One set per cycle in the common case.
// The scheme follows the paper's Ping-Pong Buffer; the pass splitting at
// segment boundaries, the per-task restart and the handshakes are this
// design's choices.
module pingpong_buffer
  import regraph_pkg::*;
#(
  parameter int unsigned BUF_BLOCKS = 512,
  parameter int unsigned OUT_DEPTH  = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  addr_t                      prop_base,
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
  // events
  output logic                       ev_jump,   // write index forced to the read index
  output logic                       ev_switch  // a buffer was filled, filling switches buffers
);
  localparam int unsigned BW     = $clog2(BUF_BLOCKS);
  localparam int unsigned SEG_SH = BW + 4;
  localparam int unsigned CW     = $clog2(OUT_DEPTH + 1);
  typedef logic [31:0] seg_t;

  // ---------------- stage A: current set ----------------
  logic                       cur_v, cur_first, restarted;
  logic [N_LANES-1:0]         cur_mask, served;
  vid_t [N_LANES-1:0]         cur_src;
  seg_t [N_LANES-1:0]         seg;
  logic [N_LANES-1:0]         pend, group;
  seg_t                       s, rd_idx, wr_idx, rd_ref;
  logic [BW:0]                fill_iss, fill_rsp;
  logic                       any_pend, present, need_jump, do_jump;
  logic                       final_pass, go, fill_ok;
  logic [CW-1:0]              out_cnt;
  logic                       b_valid, b_final;
  logic [N_LANES-1:0]         b_group;
  logic [N_LANES-1:0][3:0]    b_off;
  blk_t [N_LANES-1:0]         rdata;
  prop_t [N_LANES-1:0]        res, val;
  logic                       rsp_fire;

  always_comb begin
    pend = cur_mask & ~served;
    s    = '0;
    for (int j = N_LANES - 1; j >= 0; j--) begin
      seg[j] = seg_t'(cur_src[j] >> SEG_SH);
    end
    for (int j = N_LANES - 1; j >= 0; j--)
      if (pend[j]) s = seg[j];
    for (int j = 0; j < N_LANES; j++)
      group[j] = pend[j] && (seg[j] == s);
    any_pend  = cur_v && (pend != '0);
    present   = (s + 1 == wr_idx) || ((s + 2 == wr_idx) && (fill_iss == '0));
    need_jump = any_pend && ((cur_first && !restarted) || (!present && s != wr_idx));
    do_jump   = need_jump && (fill_iss == fill_rsp);
    final_pass = cur_v && ((pend & ~(any_pend ? group : '0)) == '0);
    go = cur_v && (any_pend ? (!need_jump && present) : 1'b1) &&
         (!final_pass || ((CW+1)'(out_cnt) + (CW+1)'(b_valid && b_final) < (CW+1)'(OUT_DEPTH)));
    rd_ref  = any_pend ? s : rd_idx;
    fill_ok = !need_jump && (fill_iss < (BW+1)'(BUF_BLOCKS)) && (wr_idx <= rd_ref + 1);
  end

  assign in_ready      = !cur_v || (go && final_pass);
  assign mem_req_valid = fill_ok;
  assign mem_req_addr  = prop_base + addr_t'(wr_idx << BW) + addr_t'(fill_iss);
  assign mem_rsp_ready = 1'b1;
  assign rsp_fire      = mem_rsp_valid;
  assign ev_jump       = do_jump;
  assign ev_switch     = rsp_fire && (fill_rsp == (BW+1)'(BUF_BLOCKS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v     <= 1'b0;
      cur_first <= 1'b0;
      cur_mask  <= '0;
      cur_src   <= '0;
      served    <= '0;
      restarted <= 1'b0;
      rd_idx    <= '0;
      wr_idx    <= '0;
      fill_iss  <= '0;
      fill_rsp  <= '0;
      b_valid   <= 1'b0;
      b_final   <= 1'b0;
      b_group   <= '0;
      b_off     <= '0;
    end else begin
      // stage A
      if (any_pend) rd_idx <= s;
      if (go) served <= served | (any_pend ? group : '0);
      if (in_valid && in_ready) begin
        cur_v     <= 1'b1;
        cur_first <= in_first;
        cur_mask  <= in_mask;
        cur_src   <= in_src;
        served    <= '0;
        restarted <= 1'b0;
      end else if (go && final_pass) begin
        cur_v <= 1'b0;
      end
      b_valid <= go;
      b_final <= go && final_pass;
      b_group <= (go && any_pend) ? group : '0;
      for (int j = 0; j < N_LANES; j++) b_off[j] <= cur_src[j][3:0];
      // filling / jump
      if (do_jump) begin
        wr_idx    <= s;
        fill_iss  <= '0;
        fill_rsp  <= '0;
        restarted <= 1'b1;
      end else begin
        if (mem_req_valid && mem_req_ready) fill_iss <= fill_iss + 1'b1;
        if (rsp_fire) begin
          fill_rsp <= fill_rsp + 1'b1;
          if (fill_rsp == (BW+1)'(BUF_BLOCKS - 1)) begin
            wr_idx   <= wr_idx + 1;
            fill_iss <= '0;
            fill_rsp <= '0;
          end
        end
      end
    end
  end

  // ---------------- duplicated ping/pong buffers ----------------
  for (genvar j = 0; j < N_LANES; j++) begin : g_buf
    blk_t mem [2*BUF_BLOCKS];
    always_ff @(posedge clk) begin
      if (rsp_fire) mem[{wr_idx[0], fill_rsp[BW-1:0]}] <= mem_rsp_data;
      if (go && any_pend && group[j])
        rdata[j] <= mem[{s[0], cur_src[j][BW+3:4]}];
    end
  end

  // ---------------- stage B: byte selector ----------------
  always_comb
    for (int j = 0; j < N_LANES; j++)
      val[j] = b_group[j] ? rdata[j][32*b_off[j] +: 32] : res[j];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res <= '0;
    else if (b_valid) res <= b_final ? '0 : val;
  end

  stream_fifo #(.W(N_LANES*PROP_W), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n,
    .in_valid(b_valid && b_final), .in_ready(), .in_data(val),
    .out_valid, .out_ready, .out_data(out_prop), .count(out_cnt));

  assert property (@(posedge clk) disable iff (!rst_n) !(do_jump && rsp_fire));
endmodule
