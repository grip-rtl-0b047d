// gather_pe: the gather function of the edge unit, applied element-wise to one
// crossbar beat of XBAR_W elements.
//
// The paper's gather may be the source feature h_u, the destination feature h_v,
// their element-wise sum or product, or h_u scaled by a constant; those five are
// selected by op. Arithmetic is Q8.8 and saturates (this design's choice).
// Purely combinational; it sits in reduce-lane stage R1.
module gather_pe
  import grip_pkg::*;
(
  input  gather_op_e op,
  input  elem_t      gconst,
  input  line_t      hu,
  input  line_t      hv,
  output line_t      msg
);
  always_comb begin
    for (int i = 0; i < XBAR_W; i++) begin
      elem_t u, v, r;
      u = line_el(hu, i);
      v = line_el(hv, i);
      unique case (op)
        G_SRC:   r = u;
        G_DST:   r = v;
        G_ADD:   r = qadd(u, v);
        G_MUL:   r = qmul(u, v);
        G_SCALE: r = qmul(gconst, u);
        default: r = u;
      endcase
      msg[DATA_W*i +: DATA_W] = r;
    end
  end
endmodule
