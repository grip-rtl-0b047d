// reduce_lane: the destination-oriented half of the edge unit (stages R0-R4).
//
// Beats arrive from the crossbar, one per cycle at most, and flow through five
// stages that never stall (in_ready is always 1):
//   R0  read the destination feature h_v from this lane's destination bank
//       (only when use_r0 is set; the paper lets this stage be disabled),
//   R1  gather PE,
//   R2  read the edge-accumulator entry of the destination vertex,
//   R3  reduce PE,
//   R4  write the entry back.
// The stages and their order are the paper's. Back-to-back beats for the same
// entry would read a stale value in R2, so R3 forwards the value held in R4 or
// written in the previous cycle (this forwarding is this design's; the paper does
// not describe hazard handling). bypass pulses each time forwarding is used.
//
// Vertex v of the tile lives in lane v mod M, row v / M; its destination
// features start at line dst_base + row*dst_stride.
module reduce_lane
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // configuration, stable during an edge-accumulate command
  input  logic        use_r0,
  input  gather_op_e  gop,
  input  reduce_op_e  rop,
  input  elem_t       gconst,
  input  logic        eset,
  input  logic [5:0]  dst_base,
  input  logic [3:0]  dst_stride,
  // from crossbar
  input  logic        in_valid,
  output logic        in_ready,
  input  edge_msg_t   in_msg,
  // destination feature bank
  output logic        dst_re,
  output logic [5:0]  dst_addr,
  input  line_t       dst_data,
  // edge accumulator bank
  output logic        acc_re,
  output logic        acc_rd_set,
  output logic [2:0]  acc_rd_idx,
  input  line_t       acc_rd_data,
  input  logic        acc_rd_first,
  output logic        acc_we,
  output logic        acc_wr_set,
  output logic [2:0]  acc_wr_idx,
  output line_t       acc_wr_data,
  // status
  output logic        busy,
  output logic        bypass
);
  typedef struct packed {
    logic       v;
    logic [2:0] idx;
    elem_t      coef;
    line_t      data;
  } stage_t;

  stage_t s0, s1, s2, s3w, s4w;   // s3w: value in R4, s4w: value written last cycle
  line_t  msg1, red3, old3;
  logic   first3;
  logic [1:0] row_in;

  assign in_ready = 1'b1;
  assign row_in   = 2'(in_msg.dst / 4'(M_RD));
  assign dst_re   = in_valid && use_r0;
  assign dst_addr = dst_base + 6'(row_in) * 6'(dst_stride) + 6'(in_msg.beat);

  // R1: gather
  gather_pe u_gather (.op(gop), .gconst, .hu(s0.data), .hv(dst_data), .msg(msg1));

  // R2: accumulator read
  assign acc_re     = s1.v;
  assign acc_rd_set = eset;
  assign acc_rd_idx = s1.idx;

  // R3: forward, then reduce
  always_comb begin
    bypass = 1'b0;
    old3   = acc_rd_data;
    first3 = acc_rd_first;
    if (s2.v && s3w.v && s3w.idx == s2.idx) begin
      old3 = s3w.data; first3 = 1'b0; bypass = 1'b1;
    end else if (s2.v && s4w.v && s4w.idx == s2.idx) begin
      old3 = s4w.data; first3 = 1'b0; bypass = 1'b1;
    end
  end
  reduce_pe u_reduce (.op(rop), .first(first3), .coef(s2.coef), .acc(old3), .msg(s2.data), .res(red3));

  // R4: write
  assign acc_we      = s3w.v;
  assign acc_wr_set  = eset;
  assign acc_wr_idx  = s3w.idx;
  assign acc_wr_data = s3w.data;

  always_ff @(posedge clk) begin
    if (rst) begin
      s0.v <= 1'b0; s1.v <= 1'b0; s2.v <= 1'b0; s3w.v <= 1'b0; s4w.v <= 1'b0;
    end else begin
      s0.v    <= in_valid;
      s0.idx  <= 3'(row_in) * 3'(BEATS) + 3'(in_msg.beat);
      s0.coef <= in_msg.coef;
      s0.data <= in_msg.data;
      s1      <= s0;
      s1.data <= msg1;
      s2      <= s1;
      s3w     <= s2;
      s3w.data <= red3;
      s4w     <= s3w;
    end
  end

  assign busy = s0.v || s1.v || s2.v || s3w.v;
endmodule
