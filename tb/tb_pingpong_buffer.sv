// tb_pingpong_buffer: Ping-Pong Buffer with 4-block (64-vertex) segments over
// a 2048-vertex property array, against a stalling memory model with random
// output back-pressure. Three tasks: a dense run of ascending sources crossing
// many segments, a run with gaps of several segments (jump access must fire
// beyond the one restart per task), and a task that starts below the previous
// one. Every valid lane must return the stored property. Then, with segment
// 0 loaded, 32 sets inside it must stream at one set per cycle; segment
// switches must have occurred.
`include "tb_util.svh"
module tb_pingpong_buffer;
  import regraph_pkg::*;
  localparam int unsigned NV = 2048;
  localparam int unsigned NS = 240;
  `TB_SETUP(60000)
  logic in_valid, in_ready, in_first, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic out_valid, out_ready, ev_jump, ev_switch;
  logic [N_LANES-1:0] in_mask; vid_t [N_LANES-1:0] in_src;
  addr_t mem_req_addr; blk_t mem_rsp_data; prop_t [N_LANES-1:0] out_prop;
  addr_t prop_base = 0;
  pingpong_buffer #(.BUF_BLOCKS(4)) dut (.*);
  hbm_model #(.WORDS(256), .NRD(1), .LAT(10)) u_m (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data),
    .w_valid(1'b0), .w_ready(), .w_addr('0), .w_data('0));

  int unsigned prop [NV];
  vid_t  s_src [NS+33][N_LANES];
  logic [N_LANES-1:0] s_mask [NS+33];
  logic  s_first [NS+33];
  int n_jump = 0, n_switch = 0;
  logic fast = 1'b0;

  initial begin
    automatic int unsigned cur = 0;
    for (int v = 0; v < NV; v++) prop[v] = $urandom;
    for (int b = 0; b < NV/16; b++) begin
      blk_t x;
      for (int l = 0; l < 16; l++) x[32*l +: 32] = prop[16*b + l];
      u_m.poke(b, x);
    end
    for (int s = 0; s < NS + 33; s++) begin
      s_first[s] = (s == 0 || s == 100 || s == 160 || s == NS);
      if (s == 0)   cur = 5;
      if (s == 100) cur = 0;
      if (s == 160) cur = 300;
      if (s == NS)  cur = 0;
      s_mask[s] = (s % 9 == 8) ? 8'h0f : '1;
      for (int j = 0; j < N_LANES; j++) begin
        if (s < 100)      cur = cur + $urandom % 3;
        else if (s < 160) cur = cur + (($urandom % 8 == 0) ? 150 + $urandom % 100 : $urandom % 2);
        else if (s < NS)  cur = cur + $urandom % 3;
        else              cur = (cur + 1) % 64;
        if (s >= NS && j == 0 && s > NS) cur = 0;
        if (cur >= NV) cur = NV - 1;
        s_src[s][j] = cur;
      end
      if (s >= NS) for (int j = 0; j < N_LANES; j++) s_src[s][j] = vid_t'(j * 7);
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_jump) n_jump++;
    if (ev_switch) n_switch++;
  end
  always @(negedge clk) out_ready = fast || ($urandom % 4 != 0);

  longint t0, t1;
  initial begin
    in_valid = 0; in_first = 0; in_mask = 0; in_src = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NS + 33; s++) begin
      @(negedge clk);
      if (s == NS + 1) begin
        // set NS restarted the task on segment 0; wait until it is done
        in_valid = 0;
        wait (!dut.cur_v && !dut.b_valid && !out_valid);
        @(negedge clk);
        fast = 1'b1;
        t0 = $time;
      end
      in_valid = 1; in_first = s_first[s]; in_mask = s_mask[s];
      for (int j = 0; j < N_LANES; j++) in_src[j] = s_src[s][j];
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk); in_valid = 0;
  end

  initial begin
    wait (rst_n);
    for (int s = 0; s < NS + 33; s++) begin
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      if (s == NS + 32) t1 = $time;
      for (int j = 0; j < N_LANES; j++)
        if (s_mask[s][j]) `CHECK(out_prop[j] == prop[s_src[s][j]], $sformatf("set %0d lane %0d src %0d", s, j, s_src[s][j]))
    end
    `CHECK(n_jump > 4, $sformatf("jump access used (%0d jumps)", n_jump))
    `CHECK(n_switch > 10, "buffer switches")
    `CHECK((t1 - t0) / 10 <= 32 + 4, $sformatf("32 on-chip sets took %0d cycles", (t1 - t0) / 10))
    `TB_DONE
  end
endmodule
