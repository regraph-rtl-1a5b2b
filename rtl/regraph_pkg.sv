// regraph_pkg: sizes, data types and user-defined functions shared by the
// heterogeneous (Big/Little) graph-processing pipelines.
//
// Every memory access is one 512-bit block. An edge is 64 bits (32-bit source
// ID in the low half, 32-bit destination ID in the high half), so one block
// carries eight edges, which is why a pipeline has eight Scatter PEs and eight
// Gather PEs. Vertex properties are 32 bits, sixteen to a block.
// The three acc_* functions are the PageRank user functions: scatter passes the
// source property on, gather adds, apply scales by a fixed-point damping factor
// and divides by the out-degree.
// Sizes follow the published U280 configuration; the damping constant, the edge
// bit layout, the task descriptor and the result-block format are this
// design's own choices.
package regraph_pkg;

  localparam int unsigned N_LANES       = 8;    // Scatter PEs = Gather PEs = edges per block
  localparam int unsigned VID_W         = 32;
  localparam int unsigned PROP_W        = 32;
  localparam int unsigned BLK_W         = 512;
  localparam int unsigned PROPS_PER_BLK = BLK_W / PROP_W;  // 16
  localparam int unsigned ADDR_W        = 32;   // block address inside a channel
  localparam int unsigned RAM_W         = 64;   // Gather PE buffer word: two properties
  // PageRank damping factor in 1/128 units (0.85 * 128, rounded down).
  localparam logic [31:0] K_DAMP        = 32'd108;

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [PROP_W-1:0] prop_t;
  typedef logic [BLK_W-1:0]  blk_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [RAM_W-1:0]  word_t;

  // One task: a (sub-)partition's edge list handed to one pipeline.
  typedef struct packed {
    addr_t       edge_base;   // block address of the first edge block
    logic [31:0] num_edges;   // number of edges (the last block may be partial)
    vid_t        dst_base;    // first destination vertex of the partition
  } task_t;

  // Eight edges read in one cycle.
  typedef struct packed {
    logic                      first;  // first set of a task
    logic                      last;   // last set of a task
    logic [N_LANES-1:0]        valid;  // lane holds a real edge
    vid_t [N_LANES-1:0]        src;
    vid_t [N_LANES-1:0]        dst;
  } edge_set_t;

  // Accumulated destination values of sixteen consecutive vertices.
  typedef struct packed {
    addr_t                     blk;    // vertex / 16 (absolute)
    prop_t [PROPS_PER_BLK-1:0] val;
  } result_t;

  // Update tuple leaving a Scatter PE.
  typedef struct packed {
    vid_t  dst;   // destination vertex, relative to the task's dst_base
    prop_t val;
  } update_t;

  function automatic prop_t acc_scatter(prop_t src_prop, prop_t edge_prop);
    acc_scatter = src_prop;
  endfunction

  function automatic prop_t acc_gather(prop_t buf_prop, prop_t value);
    acc_gather = buf_prop + value;
  endfunction

  function automatic prop_t acc_apply(prop_t t_prop, prop_t o_prop, prop_t out_deg);
    logic [63:0] scaled;
    if (out_deg == '0) begin
      acc_apply = '0;
    end else begin
      scaled    = ((64'(K_DAMP) * 64'(t_prop)) >> 7) << 16;
      acc_apply = prop_t'((scaled / 64'(out_deg)) >> 16);
    end
  endfunction

endpackage
