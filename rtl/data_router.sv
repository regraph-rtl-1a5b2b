// data_router: butterfly network from the Scatter PEs to the Gather PEs of a
// Big pipeline.
//
// N_PORTS inputs and outputs, log2(N_PORTS) stages of 2x2 switches. Stage s
// pairs the lines that differ in bit b = log2(N_PORTS)-1-s of the line number
// and steers each update tuple to the line whose bit b equals bit b of its
// (relative) destination vertex; after the last stage a tuple sits on line
// dst % N_PORTS, the Gather PE that owns its vertex. Every switch output has a
// two-entry FIFO. When both inputs of a switch want the same output, one wins
// (round robin) and the other waits; the input's ready stays low, which
// back-pressures the Scatter PEs. Each stage adds one cycle of latency.
// The butterfly topology is the paper's; the buffering and arbitration are
// this design's choices.
module data_router
  import regraph_pkg::*;
#(
  parameter int unsigned N_PORTS = N_LANES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic    [N_PORTS-1:0]     in_valid,
  output logic    [N_PORTS-1:0]     in_ready,
  input  update_t [N_PORTS-1:0]     in_upd,
  output logic    [N_PORTS-1:0]     out_valid,
  input  logic    [N_PORTS-1:0]     out_ready,
  output update_t [N_PORTS-1:0]     out_upd,
  output logic                      empty,      // no tuple inside the network
  output logic                      ev_conflict // two tuples wanted one switch output
);
  localparam int unsigned S = $clog2(N_PORTS);

  // line signals between stages: index 0 = network inputs, S = outputs
  logic    [S:0][N_PORTS-1:0] v, r;
  update_t [S:0][N_PORTS-1:0] d;
  logic    [S-1:0][N_PORTS-1:0] conflict;
  logic    [S-1:0][N_PORTS-1:0] ne;   // FIFO not empty

  assign v[0]      = in_valid;
  assign d[0]      = in_upd;
  assign in_ready  = r[0];
  assign out_valid = v[S];
  assign out_upd   = d[S];
  assign r[S]      = out_ready;
  assign empty     = (ne == '0);
  assign ev_conflict = (conflict != '0);

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int unsigned B = S - 1 - s;
    logic [N_PORTS-1:0] rr;          // round-robin: 1 = partner line has priority
    logic [N_PORTS-1:0] f_in_valid, f_in_ready, grant_self, grant_partner;
    update_t [N_PORTS-1:0] f_in_data;

    always_comb begin
      for (int o = 0; o < N_PORTS; o++) begin
        automatic int p = o ^ (1 << B);
        automatic logic want_self    = v[s][o] && (d[s][o].dst[B] == 1'((o >> B) & 1));
        automatic logic want_partner = v[s][p] && (d[s][p].dst[B] == 1'((o >> B) & 1));
        grant_self[o]    = want_self && !(want_partner && rr[o]);
        grant_partner[o] = want_partner && !(want_self && !rr[o]);
        conflict[s][o]   = want_self && want_partner;
        f_in_valid[o]    = grant_self[o] || grant_partner[o];
        f_in_data[o]     = grant_self[o] ? d[s][o] : d[s][p];
      end
      // an input is taken when the output it was granted accepts it
      for (int i = 0; i < N_PORTS; i++) begin
        automatic int p = i ^ (1 << B);
        r[s][i] = (grant_self[i] && f_in_ready[i]) || (grant_partner[p] && f_in_ready[p]);
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rr <= '0;
      else
        for (int o = 0; o < N_PORTS; o++)
          if (conflict[s][o] && f_in_ready[o]) rr[o] <= !rr[o];
    end

    for (genvar o = 0; o < N_PORTS; o++) begin : g_out
      stream_fifo #(.W($bits(update_t)), .DEPTH(2)) u_q (
        .clk, .rst_n,
        .in_valid(f_in_valid[o]), .in_ready(f_in_ready[o]), .in_data(f_in_data[o]),
        .out_valid(v[s+1][o]), .out_ready(r[s+1][o]), .out_data(d[s+1][o]), .count());
      assign ne[s][o] = v[s+1][o];
    end
  end
endmodule
