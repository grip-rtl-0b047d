// xbar: the N x M crossbar between prefetch lanes and reduce lanes.
//
// Every beat leaving a prefetch lane is routed to the reduce lane that owns its
// destination vertex, lane = dst mod M (the paper assigns output vertices to
// lanes statically, e.g. by a hash of the vertex id; mod M is this design's
// hash). When several inputs target the same output in one cycle, a round-robin
// arbiter per output grants one and back-pressures the rest (arbitration policy
// is this design's choice). The path is combinational: valid/ready/data pass
// straight through, and a grant is taken when the output is ready. conflict
// pulses when at least one valid input lost arbitration this cycle.
module xbar
  import grip_pkg::*;
#(
  parameter int unsigned N = N_PF,
  parameter int unsigned M = M_RD
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [N-1:0]    in_valid,
  output logic [N-1:0]    in_ready,
  input  edge_msg_t       in_msg [N],
  output logic [M-1:0]    out_valid,
  input  logic [M-1:0]    out_ready,
  output edge_msg_t       out_msg [M],
  output logic            conflict
);
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;
  logic [NW-1:0] rr [M];          // highest-priority input per output
  logic [N-1:0]  req [M];
  logic [NW-1:0] gnt [M];
  logic [M-1:0]  has;

  always_comb begin
    in_ready = '0;
    conflict = 1'b0;
    for (int o = 0; o < M; o++) begin
      for (int i = 0; i < N; i++) req[o][i] = in_valid[i] && (32'(in_msg[i].dst) % M == o);
      has[o] = 1'b0;
      gnt[o] = '0;
      for (int k = 0; k < N; k++) begin
        int unsigned i;
        i = (32'(rr[o]) + k) % N;
        if (!has[o] && req[o][i]) begin
          has[o] = 1'b1;
          gnt[o] = NW'(i);
        end
      end
      out_valid[o] = has[o];
      out_msg[o]   = in_msg[gnt[o]];
      if (has[o]) in_ready[gnt[o]] = out_ready[o];
      if ($countones(req[o]) > 1) conflict = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < M; o++) begin
      if (rst) rr[o] <= '0;
      else if (has[o] && out_ready[o]) rr[o] <= NW'((32'(gnt[o]) + 1) % N);
    end
  end
endmodule
