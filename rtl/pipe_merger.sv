// pipe_merger: the Merger inside a Little pipeline.
//
// Without a data router, every Gather PE of a Little pipeline buffers the
// whole partition, so one vertex's value is spread over all N_LANES buffers.
// While the Gather PEs stream their buffers out in lockstep (one 64-bit word,
// two vertices, per PE per cycle), this unit adds the N_LANES words lane by
// lane and packs eight sums of two into one result block of sixteen
// consecutive vertices, numbered from blk_base. It takes one word set per
// cycle and emits one block every eight cycles; out_last marks the block built
// from the last words. Summing the buffers follows the paper; the packing into
// 512-bit result blocks is this design's choice.
module pipe_merger
  import regraph_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  addr_t                 blk_base,
  input  logic  [N_LANES-1:0]   in_valid,
  output logic                  in_ready,     // common to all lanes
  input  word_t [N_LANES-1:0]   in_data,
  input  logic                  in_last,
  output logic                  out_valid,
  input  logic                  out_ready,
  output result_t               out_res,
  output logic                  out_last
);
  logic [2:0]  wcnt;
  addr_t       bcnt;
  prop_t [PROPS_PER_BLK-1:0] acc;
  prop_t       sum0, sum1;
  logic        close;

  always_comb begin
    sum0 = '0;
    sum1 = '0;
    for (int k = 0; k < N_LANES; k++) begin
      sum0 = acc_gather(sum0, in_data[k][31:0]);
      sum1 = acc_gather(sum1, in_data[k][63:32]);
    end
  end

  assign close    = (wcnt == 3'd7);
  assign in_ready = (&in_valid) && (!close || !out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt      <= '0;
      bcnt      <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_res   <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_ready) begin
        acc[2*wcnt]   <= sum0;
        acc[2*wcnt+1] <= sum1;
        wcnt          <= wcnt + 1'b1;
        if (close) begin
          out_valid <= 1'b1;
          out_res.blk <= blk_base + bcnt;
          for (int i = 0; i < PROPS_PER_BLK - 2; i++) out_res.val[i] <= acc[i];
          out_res.val[PROPS_PER_BLK-2] <= sum0;
          out_res.val[PROPS_PER_BLK-1] <= sum1;
          out_last <= in_last;
          bcnt     <= in_last ? '0 : bcnt + 1;
        end
      end
    end
  end
endmodule
