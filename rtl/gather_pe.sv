// gather_pe: one Gather PE with its destination-vertex buffer.
//
// The buffer is DEPTH_WORDS words of 64 bits, each holding two 32-bit
// temporary properties (vertex v sits in word v/2, half v%2), as a URAM with
// a 64-bit port would. An update is applied as read-modify-write: the word is
// read in the cycle the update is accepted, the new value is computed and
// written one cycle later. A back-to-back update to the same word would read
// the stale value, so the last written word is kept in a shift register and
// forwarded, which lets the PE accept one update every cycle (II of one).
//
// After reset the PE clears its buffer (DEPTH_WORDS cycles, upd_ready low).
// A flush pulse, given once the last update has been accepted, streams every
// word out in address order (out_last on the final word) and writes zero behind
// each read, so the buffer is clean for the next task. idle is high when no
// update is in flight and the PE is accepting.
// Buffer size and width and the forwarding register follow the paper; the
// clearing scheme and interface are this design's own.
module gather_pe
  import regraph_pkg::*;
#(
  parameter int unsigned DEPTH_WORDS = 32768,
  localparam int unsigned AW = $clog2(DEPTH_WORDS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        upd_valid,
  output logic        upd_ready,
  input  logic [AW:0] upd_addr,    // vertex index inside this PE
  input  prop_t       upd_val,
  input  logic        flush,
  output logic        idle,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  output logic        out_last
);
  typedef enum logic [1:0] {S_CLEAR, S_ACC, S_DRAIN} state_e;
  state_e state;

  word_t          mem [DEPTH_WORDS];
  word_t          rd_data;
  logic [AW-1:0]  rd_addr, wr_addr, ptr;
  logic           rd_en, wr_en;
  word_t          wr_data;

  // accumulate stage
  logic           s1_valid, s1_half;
  logic [AW-1:0]  s1_addr;
  prop_t          s1_val;
  logic           hist_valid;
  logic [AW-1:0]  hist_addr;
  word_t          hist_data;
  word_t          base_w, new_w;

  // drain stage
  logic           d_valid, d_last;   // read issued last cycle
  logic [1:0]     q_cnt;
  logic           q_in_ready;
  logic           drain_issue;

  assign upd_ready = (state == S_ACC);
  assign idle      = (state == S_ACC) && !s1_valid;

  always_comb begin
    base_w = (hist_valid && hist_addr == s1_addr) ? hist_data : rd_data;
    new_w  = base_w;
    if (s1_half) new_w[63:32] = acc_gather(base_w[63:32], s1_val);
    else         new_w[31:0]  = acc_gather(base_w[31:0],  s1_val);
  end

  assign drain_issue = (state == S_DRAIN) && ({1'b0, q_cnt} + {2'b0, d_valid} < 3'd2);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = ptr;
    wr_en   = 1'b0;
    wr_addr = s1_addr;
    wr_data = new_w;
    case (state)
      S_CLEAR: begin
        wr_en   = 1'b1;
        wr_addr = ptr;
        wr_data = '0;
      end
      S_ACC: begin
        rd_en   = upd_valid;
        rd_addr = upd_addr[AW:1];
        wr_en   = s1_valid;
      end
      default: begin
        rd_en   = drain_issue;
        wr_en   = drain_issue;     // clear behind the read
        wr_addr = ptr;
        wr_data = '0;
      end
    endcase
  end

  // simple dual-port RAM, read-before-write
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_CLEAR;
      ptr        <= '0;
      s1_valid   <= 1'b0;
      s1_half    <= 1'b0;
      s1_addr    <= '0;
      s1_val     <= '0;
      hist_valid <= 1'b0;
      hist_addr  <= '0;
      hist_data  <= '0;
      d_valid    <= 1'b0;
      d_last     <= 1'b0;
    end else begin
      s1_valid   <= upd_valid && upd_ready;
      s1_half    <= upd_addr[0];
      s1_addr    <= upd_addr[AW:1];
      s1_val     <= upd_val;
      hist_valid <= s1_valid;
      hist_addr  <= s1_addr;
      hist_data  <= new_w;
      d_valid    <= drain_issue;
      d_last     <= drain_issue && (ptr == AW'(DEPTH_WORDS - 1));
      case (state)
        S_CLEAR: begin
          ptr <= ptr + 1'b1;
          if (ptr == AW'(DEPTH_WORDS - 1)) begin
            state <= S_ACC;
            ptr   <= '0;
          end
        end
        S_ACC: begin
          if (flush) begin
            state <= S_DRAIN;
            ptr   <= '0;
          end
        end
        default: begin
          if (drain_issue) begin
            ptr <= ptr + 1'b1;
            if (ptr == AW'(DEPTH_WORDS - 1)) begin
              state <= S_ACC;
              ptr   <= '0;
            end
          end
        end
      endcase
    end
  end

  stream_fifo #(.W(RAM_W + 1), .DEPTH(2)) u_out (
    .clk, .rst_n,
    .in_valid(d_valid), .in_ready(q_in_ready), .in_data({d_last, rd_data}),
    .out_valid, .out_ready, .out_data({out_last, out_data}),
    .count(q_cnt)
  );

  assert property (@(posedge clk) disable iff (!rst_n) d_valid |-> q_in_ready);
  assert property (@(posedge clk) disable iff (!rst_n) flush |-> idle && !upd_valid);
endmodule
