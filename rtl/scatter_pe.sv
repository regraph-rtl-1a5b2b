// scatter_pe: one Scatter PE (combinational).
//
// Turns an edge and the property of its source vertex into an update tuple
// for the destination vertex: the value is acc_scatter(source property, edge
// property) and the destination is made relative to the partition's first
// vertex, which is how the Gather PE buffers address it. An invalid (padding)
// edge gives an invalid update. Eight of these sit side by side in every
// pipeline and process one edge each per cycle (II of one). The user function
// is the paper's PageRank scatter; the relative addressing is this design's.
// With the PageRank function the update value is the source property itself
// and upd_valid is edge_valid, so those outputs are wires from the inputs; a
// different acc_scatter makes them logic. edge_prop is unused by PageRank.
module scatter_pe
  import regraph_pkg::*;
(
  input  logic    edge_valid,
  input  vid_t    edge_dst,
  input  prop_t   edge_prop,
  input  prop_t   src_prop,
  input  vid_t    dst_base,
  output logic    upd_valid,
  output update_t upd
);
  assign upd_valid = edge_valid;
  assign upd.dst   = edge_dst - dst_base;
  assign upd.val   = acc_scatter(src_prop, edge_prop);
endmodule
