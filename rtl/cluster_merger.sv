// cluster_merger: the Little Merger or the Big Merger.
//
// The pipelines of one cluster work on sub-partitions of the same partition,
// so each of them produces a partial value for every vertex of it, in the same
// block order. This unit waits until all K inputs hold a block, adds them
// lane by lane through a balanced adder tree (acc_gather at every node) and
// registers the sum; one block per cycle. A block is marked last when the
// inputs' blocks are. Summing across pipelines follows the paper; building the
// tree as one registered stage instead of separate small kernels is this
// design's simplification.
module cluster_merger
  import regraph_pkg::*;
#(
  parameter int unsigned K = 7
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic    [K-1:0]           in_valid,
  output logic    [K-1:0]           in_ready,
  input  result_t [K-1:0]           in_res,
  input  logic    [K-1:0]           in_last,
  output logic                      out_valid,
  input  logic                      out_ready,
  output result_t                   out_res,
  output logic                      out_last
);
  localparam int unsigned KP = 1 << $clog2(K > 1 ? K : 2);

  prop_t [PROPS_PER_BLK-1:0] sum;
  logic                      fire;

  always_comb begin
    for (int l = 0; l < PROPS_PER_BLK; l++) begin
      prop_t node [2*KP];
      for (int i = 0; i < KP; i++) node[KP + i] = (i < K) ? in_res[i].val[l] : '0;
      for (int i = KP - 1; i >= 1; i--) node[i] = acc_gather(node[2*i], node[2*i+1]);
      sum[l] = node[1];
    end
  end

  assign fire     = (&in_valid) && (!out_valid || out_ready);
  assign in_ready = {K{fire}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_res   <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid   <= 1'b1;
        out_res.blk <= in_res[0].blk;
        out_res.val <= sum;
        out_last    <= in_last[0];
      end
    end
  end

  for (genvar i = 1; i < K; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      fire |-> in_res[i].blk == in_res[0].blk && in_last[i] == in_last[0]);
  end
endmodule
