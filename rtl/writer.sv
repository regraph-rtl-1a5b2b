// writer: writes the new vertex properties back to every memory channel.
//
// Each pipeline reads source properties from its own channel, so every channel
// keeps a full copy of the property array. A block from the Apply stage is
// written to address wr_base + blk on all NCH channels; the channels may
// accept at different cycles, and a mask remembers which have taken the block.
// The next block is taken when all have. One block per cycle at best. The
// broadcast follows the paper; writing to a separate array (wr_base, swapped
// by the host between iterations so the current properties stay intact) is
// this design's choice. w_data is the input block itself (the channels all
// write the same data), so those output bits are plain wires from the input.
module writer
  import regraph_pkg::*;
#(
  parameter int unsigned NCH = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  addr_t            wr_base,
  input  logic             in_valid,
  output logic             in_ready,
  input  result_t          in_res,
  output logic [NCH-1:0]   w_valid,
  input  logic [NCH-1:0]   w_ready,
  output addr_t            w_addr,
  output blk_t             w_data,
  output logic             ev_block    // a block has reached every channel
);
  logic [NCH-1:0] done;

  assign w_valid  = in_valid ? ~done : '0;
  assign w_addr   = wr_base + in_res.blk;
  assign w_data   = in_res.val;
  assign in_ready = in_valid && ((done | w_ready) == '1);
  assign ev_block = in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        done <= '0;
    else if (in_ready) done <= '0;
    else               done <= done | (w_valid & w_ready);
  end
endmodule
