// tb_scatter_pe: random edges through one Scatter PE; the update must carry
// the source property (PageRank scatter) and the destination relative to the
// partition base, and be valid exactly when the edge is.
`include "tb_util.svh"
module tb_scatter_pe;
  import regraph_pkg::*;
  `TB_SETUP(1000)
  logic ev, uv; vid_t dst, base; prop_t ep, sp; update_t u;
  scatter_pe dut (.edge_valid(ev), .edge_dst(dst), .edge_prop(ep), .src_prop(sp),
                  .dst_base(base), .upd_valid(uv), .upd(u));
  initial begin
    for (int i = 0; i < 200; i++) begin
      ev = 1'($urandom); base = $urandom % 100000; dst = base + $urandom % 65536;
      ep = $urandom; sp = $urandom;
      #1;
      `CHECK(uv == ev, "valid")
      `CHECK(u.dst == dst - base, "relative destination")
      `CHECK(u.val == sp, "update value")
    end
    `TB_DONE
  end
endmodule
