// hbm_model: behavioural model of one HBM pseudo-channel (testbench only).
//
// WORDS blocks of 512 bits, NRD read ports and one write port. Each read port
// accepts a request when its queue has room (and, with STALL set, not on the
// randomly chosen stall cycles) and returns the block LAT cycles later, in
// order, holding it until rsp_ready. The block is sampled when the request is
// accepted. Writes take effect at the clock edge they are accepted. Addresses
// wrap modulo WORDS. poke/peek give the testbench direct access.
module hbm_model
  import regraph_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned NRD   = 2,
  parameter int unsigned LAT   = 6,
  parameter bit          STALL = 1'b1,
  parameter int unsigned QD    = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic  [NRD-1:0]     req_valid,
  output logic  [NRD-1:0]     req_ready,
  input  addr_t [NRD-1:0]     req_addr,
  output logic  [NRD-1:0]     rsp_valid,
  input  logic  [NRD-1:0]     rsp_ready,
  output blk_t  [NRD-1:0]     rsp_data,
  input  logic                w_valid,
  output logic                w_ready,
  input  addr_t               w_addr,
  input  blk_t                w_data
);
  blk_t        mem [WORDS];
  blk_t        qd  [NRD][QD];
  longint      qt  [NRD][QD];
  int unsigned wp [NRD], rp [NRD], cnt [NRD];
  logic [NRD-1:0] stall;
  logic        wstall;
  longint      cyc;
  int unsigned n_stall;
  bit          stall_en = 1'b1;   // the testbench may turn random stalls off

  function automatic void poke(int unsigned a, blk_t d);
    mem[a % WORDS] = d;
  endfunction

  function automatic blk_t peek(int unsigned a);
    return mem[a % WORDS];
  endfunction

  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      req_ready[p] = (cnt[p] < QD) && !stall[p];
      rsp_valid[p] = (cnt[p] != 0) && (qt[p][rp[p]] <= cyc);
      rsp_data[p]  = qd[p][rp[p]];
    end
    w_ready = !wstall;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc     <= 0;
      stall   <= '0;
      wstall  <= 1'b0;
      n_stall <= 0;
      for (int p = 0; p < NRD; p++) begin
        wp[p]  <= 0;
        rp[p]  <= 0;
        cnt[p] <= 0;
      end
    end else begin
      cyc <= cyc + 1;
      for (int p = 0; p < NRD; p++) begin
        automatic logic push = req_valid[p] && req_ready[p];
        automatic logic pop  = rsp_valid[p] && rsp_ready[p];
        stall[p] <= STALL && stall_en && (($urandom % 8) == 0);
        if (req_valid[p] && !req_ready[p]) n_stall <= n_stall + 1;
        if (push) begin
          qd[p][wp[p]] <= mem[req_addr[p] % WORDS];
          qt[p][wp[p]] <= cyc + LAT;
          wp[p] <= (wp[p] + 1) % QD;
        end
        if (pop) rp[p] <= (rp[p] + 1) % QD;
        cnt[p] <= cnt[p] + (push ? 1 : 0) - (pop ? 1 : 0);
      end
      wstall <= STALL && stall_en && (($urandom % 8) == 0);
      if (w_valid && w_ready) mem[w_addr % WORDS] <= w_data;
    end
  end
endmodule
