// prefetch_lane: the source-oriented half of the edge unit (stages P0-P2).
//
// P0 dequeues the next source vertex of this lane's partition from the vertex
// list in the lane's nodeflow bank; P1 iterates over that vertex's outgoing edge
// records; P2 reads the vertex's feature slice for the current tile and emits it,
// XBAR_W elements per beat, tagged with the edge's destination vertex and
// coefficient, towards the crossbar. Stage names and order follow the paper;
// the record layout (grip_pkg::vlist_t, erec_t) and the exact cycle behaviour
// are this design's.
//
// Timing: 2 cycles per source vertex to fetch its list entry, then per edge one
// cycle for the edge record plus one cycle per beat. Feature reads are issued
// back-to-back into a 2-entry output FIFO, so the lane sustains one beat per
// cycle within an edge while the crossbar accepts. start is a one-cycle pulse
// taken in S_IDLE; done pulses once when the last beat has left the lane.
module prefetch_lane
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [9:0]  vlist_base,
  input  logic [7:0]  n_src,
  input  logic [7:0]  feat_off,
  input  logic [1:0]  beats,
  output logic        done,
  // nodeflow bank
  output logic        edge_re,
  output logic [9:0]  edge_addr,
  input  logic [31:0] edge_data,
  output logic        feat_re,
  output logic [7:0]  feat_addr,
  input  line_t       feat_data,
  // to crossbar
  output logic        out_valid,
  input  logic        out_ready,
  output edge_msg_t   out
);
  typedef enum logic [2:0] {S_IDLE, S_VL, S_VLW, S_ED, S_FT, S_DRAIN} state_e;
  state_e state;

  logic [9:0]  vbase_q;
  logic [7:0]  n_q, foff_q, vidx;
  logic [1:0]  beats_q, b;
  logic [7:0]  j;
  vlist_t      ent;
  erec_t       rec;
  vlist_t      vl_rd;
  assign vl_rd = vlist_t'(edge_data);

  // P2 read in flight and the message it will become
  logic        pend;
  logic [3:0]  pend_dst;
  elem_t       pend_coef;
  logic        pend_beat;
  logic [1:0]  fcount;
  logic        can_issue;
  logic        fifo_in_ready;

  assign can_issue = (32'(fcount) + (pend ? 1 : 0)) < 2;

  always_comb begin
    edge_re   = 1'b0;
    edge_addr = '0;
    feat_re   = 1'b0;
    feat_addr = ent.feat_addr + foff_q + 8'(b);
    unique case (state)
      S_VL:  begin edge_re = 1'b1; edge_addr = vbase_q + 10'(vidx); end
      S_VLW: begin edge_re = 1'b1; edge_addr = vl_rd.first; end
      S_FT:  if (can_issue) begin
               feat_re = 1'b1;
               if (b == beats_q - 2'd1 && (j + 8'd1) < ent.count) begin
                 edge_re = 1'b1; edge_addr = ent.first + 10'(j) + 10'd1;
               end
             end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state <= S_IDLE;
      pend  <= 1'b0;
    end else begin
      pend <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          vbase_q <= vlist_base; n_q <= n_src; foff_q <= feat_off; beats_q <= beats;
          vidx <= '0;
          state <= (n_src == 0) ? S_DRAIN : S_VL;
        end
        S_VL:  state <= S_VLW;
        S_VLW: begin
          ent <= vlist_t'(edge_data);
          j   <= '0;
          if (vl_rd.count == 0) begin
            vidx  <= vidx + 8'd1;
            state <= (vidx + 8'd1 == n_q) ? S_DRAIN : S_VL;
          end else state <= S_ED;
        end
        S_ED: begin
          rec <= erec_t'(edge_data);
          b   <= '0;
          state <= S_FT;
        end
        S_FT: if (can_issue) begin
          pend <= 1'b1;
          pend_dst  <= rec.dst;
          pend_coef <= rec.coef;
          pend_beat <= b[0];
          if (b == beats_q - 2'd1) begin
            if ((j + 8'd1) < ent.count) begin
              j <= j + 8'd1;
              state <= S_ED;
            end else begin
              vidx  <= vidx + 8'd1;
              state <= (vidx + 8'd1 == n_q) ? S_DRAIN : S_VL;
            end
          end else b <= b + 2'd1;
        end
        S_DRAIN: if (!pend && fcount == 0) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  edge_msg_t fifo_in;
  always_comb begin
    fifo_in.dst  = pend_dst;
    fifo_in.coef = pend_coef;
    fifo_in.beat = pend_beat;
    fifo_in.data = feat_data;
  end

  sync_fifo #(.T(edge_msg_t), .DEPTH(2)) u_out (
    .clk, .rst,
    .in_valid(pend), .in_ready(fifo_in_ready), .in(fifo_in),
    .out_valid, .out_ready, .out, .count(fcount)
  );

`ifndef SYNTHESIS
  a_fifo_room: assert property (@(posedge clk) disable iff (rst) pend |-> fifo_in_ready);
`endif
endmodule
