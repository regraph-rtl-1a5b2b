// apply_module: the Apply stage.
//
// It takes the merged results of the Little cluster and of the Big cluster at
// the same time, each through its own Apply PE with its own out-degree read
// port, and passes the new property blocks on to the Writer first come, first
// served: a block that had to wait goes before one that has just arrived, and
// blocks arriving together alternate. One block per cycle leaves.
// Two PEs and an arbiter are the paper's structure; the tie-break is this
// design's choice.
module apply_module
  import regraph_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  addr_t         deg_base,
  input  logic    [1:0] in_valid,    // 0: Little cluster, 1: Big cluster
  output logic    [1:0] in_ready,
  input  result_t [1:0] in_res,
  output logic    [1:0] mem_req_valid,
  input  logic    [1:0] mem_req_ready,
  output addr_t   [1:0] mem_req_addr,
  input  logic    [1:0] mem_rsp_valid,
  output logic    [1:0] mem_rsp_ready,
  input  blk_t    [1:0] mem_rsp_data,
  output logic          out_valid,
  input  logic          out_ready,
  output result_t       out_res,
  output logic          ev_contend   // both PEs offered a block in one cycle
);
  logic    [1:0] a_valid, a_ready, waited;
  result_t [1:0] a_res;
  logic          rr, pick;

  for (genvar i = 0; i < 2; i++) begin : g_pe
    apply_pe u_pe (
      .clk, .rst_n, .deg_base,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_res(in_res[i]),
      .mem_req_valid(mem_req_valid[i]), .mem_req_ready(mem_req_ready[i]),
      .mem_req_addr(mem_req_addr[i]),
      .mem_rsp_valid(mem_rsp_valid[i]), .mem_rsp_ready(mem_rsp_ready[i]),
      .mem_rsp_data(mem_rsp_data[i]),
      .out_valid(a_valid[i]), .out_ready(a_ready[i]), .out_res(a_res[i]));
  end

  always_comb begin
    if (a_valid == 2'b11) begin
      if (waited[0] != waited[1]) pick = waited[1];
      else                        pick = rr;
    end else begin
      pick = a_valid[1];
    end
  end

  assign ev_contend = (a_valid == 2'b11);
  assign a_ready[0] = (!out_valid || out_ready) && a_valid[0] && (pick == 1'b0);
  assign a_ready[1] = (!out_valid || out_ready) && a_valid[1] && (pick == 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_res   <= '0;
      rr        <= 1'b0;
      waited    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (a_ready != '0) begin
        out_valid <= 1'b1;
        out_res   <= a_res[pick];
        if (a_valid == 2'b11 && waited[0] == waited[1]) rr <= !pick;
      end
      waited <= a_valid & ~a_ready;
    end
  end
endmodule
