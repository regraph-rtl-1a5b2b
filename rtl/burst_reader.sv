// burst_reader: sequential edge reader of a Big or Little pipeline.
//
// Accepts one task (edge_base, num_edges, dst_base) at a time and reads its
// ceil(num_edges/8) edge blocks from the edge channel, one request per cycle,
// with up to FIFO_DEPTH requests in flight (credits cover the output FIFO, so
// the response port is always ready). Each response becomes an edge_set_t:
// edge j of the block sits in bits [64j +: 64], source ID low, destination ID
// high. Lanes past the end of the edge list are marked invalid and copy the
// source ID of the last real edge, so source IDs stay non-decreasing. The
// first and last sets of a task are flagged; a task without edges yields one
// empty set flagged first and last, so the pipeline still writes out its
// buffers. A new task is accepted once every response of the current one is in.
// Reading edges in bursts follows the paper; the block layout, flags and
// credit scheme are this design's choices.
module burst_reader
  import regraph_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // task input
  input  logic      task_valid,
  output logic      task_ready,
  input  task_t     task_i,
  // edge channel read port (in-order responses)
  output logic      mem_req_valid,
  input  logic      mem_req_ready,
  output addr_t     mem_req_addr,
  input  logic      mem_rsp_valid,
  output logic      mem_rsp_ready,
  input  blk_t      mem_rsp_data,
  // edge sets
  output logic      set_valid,
  input  logic      set_ready,
  output edge_set_t set_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic        busy;
  addr_t       base;
  logic [31:0] n_edges, n_blk, n_req, n_rsp;
  logic [CW:0] inflight;
  logic [CW-1:0] fifo_cnt;
  logic        fifo_in_valid, fifo_in_ready;
  edge_set_t   fifo_in;
  logic        req_fire, rsp_fire, empty_task;
  logic [31:0] remain;

  assign task_ready    = !busy;
  assign empty_task    = busy && (n_blk == '0);
  assign mem_req_valid = busy && (n_req < n_blk) && ((inflight + (CW+1)'(fifo_cnt)) < (CW+1)'(FIFO_DEPTH));
  assign mem_req_addr  = base + n_req;
  assign mem_rsp_ready = 1'b1;
  assign req_fire      = mem_req_valid && mem_req_ready;
  assign rsp_fire      = mem_rsp_valid && mem_rsp_ready;
  assign remain        = n_edges - (n_rsp << 3);

  always_comb begin
    fifo_in       = '0;
    fifo_in_valid = 1'b0;
    if (empty_task) begin
      fifo_in_valid = 1'b1;
      fifo_in.first = 1'b1;
      fifo_in.last  = 1'b1;
    end else if (rsp_fire) begin
      fifo_in_valid = 1'b1;
      fifo_in.first = (n_rsp == '0);
      fifo_in.last  = (n_rsp == n_blk - 1);
      for (int j = 0; j < N_LANES; j++) begin
        fifo_in.src[j]   = mem_rsp_data[64*j +: 32];
        fifo_in.dst[j]   = mem_rsp_data[64*j+32 +: 32];
        fifo_in.valid[j] = (remain > 32'(j));
        if (!fifo_in.valid[j] && j > 0) fifo_in.src[j] = fifo_in.src[j-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      base     <= '0;
      n_edges  <= '0;
      n_blk    <= '0;
      n_req    <= '0;
      n_rsp    <= '0;
      inflight <= '0;
    end else begin
      inflight <= inflight + (CW+1)'(req_fire) - (CW+1)'(rsp_fire);
      if (!busy) begin
        if (task_valid) begin
          busy    <= 1'b1;
          base    <= task_i.edge_base;
          n_edges <= task_i.num_edges;
          n_blk   <= (task_i.num_edges + 32'd7) >> 3;
          n_req   <= '0;
          n_rsp   <= '0;
        end
      end else begin
        if (req_fire) n_req <= n_req + 1;
        if (rsp_fire) n_rsp <= n_rsp + 1;
        if (empty_task && fifo_in_ready) busy <= 1'b0;
        else if (rsp_fire && (n_rsp == n_blk - 1)) busy <= 1'b0;
      end
    end
  end

  stream_fifo #(.W($bits(edge_set_t)), .DEPTH(FIFO_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(fifo_in_valid), .in_ready(fifo_in_ready), .in_data(fifo_in),
    .out_valid(set_valid), .out_ready(set_ready), .out_data(set_o),
    .count(fifo_cnt)
  );

  // responses never arrive without credit, so the FIFO never overflows
  assert property (@(posedge clk) disable iff (!rst_n) fifo_in_valid |-> fifo_in_ready || empty_task);
endmodule
