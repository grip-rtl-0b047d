// reduce_pe: the reduce function of the edge unit, applied element-wise to one
// message beat and the matching edge-accumulator values.
//
// Sum and max follow the paper. Mean is done as a sum in which each message is
// first multiplied by the edge's coefficient, which the offline nodeflow builder
// sets to 1/deg(v); this keeps the datapath free of dividers (this design's
// choice). When the accumulator entry has not been written yet in this tile
// (first = 1) the message is taken as is, which is the identity for all three.
// Purely combinational; it sits in reduce-lane stage R3.
module reduce_pe
  import grip_pkg::*;
(
  input  reduce_op_e op,
  input  logic       first,
  input  elem_t      coef,
  input  line_t      acc,
  input  line_t      msg,
  output line_t      res
);
  always_comb begin
    for (int i = 0; i < XBAR_W; i++) begin
      elem_t a, m, r;
      a = line_el(acc, i);
      m = line_el(msg, i);
      if (op == R_MEAN) m = qmul(coef, m);
      if (first)               r = m;
      else if (op == R_MAX)    r = (m > a) ? m : a;
      else                     r = qadd(a, m);
      res[DATA_W*i +: DATA_W] = r;
    end
  end
endmodule
