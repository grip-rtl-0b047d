// sync_fifo: small synchronous FIFO used for command queues and stage decoupling.
//
// Valid/ready on both sides: an entry is written when in_valid && in_ready and
// read when out_valid && out_ready, both on the rising clock edge. out is the
// head entry, available combinationally while out_valid is high. count gives the
// occupancy so a producer with reads in flight can reserve space. Synchronous
// active-high reset empties it.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  T                         in,
  output logic                     out_valid,
  input  logic                     out_ready,
  output T                         out,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out       = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= in;
        wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

`ifndef SYNTHESIS
  // Handshake rules: never push into a full FIFO or pop an empty one.
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) count <= ($clog2(DEPTH+1))'(DEPTH));
`endif
endmodule
