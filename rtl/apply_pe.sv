// apply_pe: one Apply PE, serving one cluster's merged results.
//
// For every result block (sixteen accumulated values) it reads the matching
// block of out-degrees, deg_base + blk, from its memory port and computes the
// sixteen new properties with acc_apply in parallel. Requests are issued as
// blocks arrive; the blocks wait in a FIFO of OUTSTANDING entries until their
// out-degrees return (in order), so memory latency is hidden. One block per
// cycle. The Apply function is the paper's PageRank one; keeping out-degrees in
// a separate array read per block is this design's choice.
module apply_pe
  import regraph_pkg::*;
#(
  parameter int unsigned OUTSTANDING = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  addr_t   deg_base,
  input  logic    in_valid,
  output logic    in_ready,
  input  result_t in_res,
  output logic    mem_req_valid,
  input  logic    mem_req_ready,
  output addr_t   mem_req_addr,
  input  logic    mem_rsp_valid,
  output logic    mem_rsp_ready,
  input  blk_t    mem_rsp_data,
  output logic    out_valid,
  input  logic    out_ready,
  output result_t out_res
);
  logic    q_in_ready, q_valid;
  result_t q_res;

  assign mem_req_valid = in_valid && q_in_ready;
  assign mem_req_addr  = deg_base + in_res.blk;
  assign in_ready      = q_in_ready && mem_req_ready;

  stream_fifo #(.W($bits(result_t)), .DEPTH(OUTSTANDING)) u_q (
    .clk, .rst_n,
    .in_valid(in_valid && in_ready), .in_ready(q_in_ready), .in_data(in_res),
    .out_valid(q_valid), .out_ready(mem_rsp_valid && mem_rsp_ready), .out_data(q_res), .count());

  assign mem_rsp_ready = q_valid && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_res   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (mem_rsp_valid && mem_rsp_ready) begin
        out_valid   <= 1'b1;
        out_res.blk <= q_res.blk;
        for (int l = 0; l < PROPS_PER_BLK; l++)
          out_res.val[l] <= acc_apply(q_res.val[l], '0, mem_rsp_data[32*l +: 32]);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> q_valid);
endmodule
