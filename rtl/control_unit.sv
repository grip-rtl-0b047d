// control_unit: the command front end of the accelerator.
//
// The host pushes 128-bit commands (grip_pkg::cmd_t) into a FIFO. The unit
// dequeues them strictly in order and issues each to the execution unit or
// memory-controller channel it names, without waiting for it to finish, so
// different units run concurrently. A command whose target is still busy waits
// at the head of the queue. A barrier waits until every earlier command has
// completed; this is how the host orders dependent work. OP_CFG writes an
// activation register in the update unit and completes at once. These rules are
// the paper's; the FIFO depth (16), the one-cycle issue and the status layout are
// this design's.
//
// Status register, readable at any time:
//   [31:0]  number of commands completed since reset,
//   [35:32] opcode of the most recently completed command,
//   [63:56] busy bit of each unit (grip_pkg::U_*).
// Every completion updates it.
module control_unit
  import grip_pkg::*;
#(
  parameter int unsigned CMD_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst,
  // host
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic [63:0]        status,
  // issue to units
  output logic [N_UNITS-1:0] issue,
  output logic               issue_store,
  output cmd_t               issue_cmd,
  input  logic [N_UNITS-1:0] unit_done,
  output logic               cfg_we,
  // events
  output logic               barrier_wait
);
  cmd_t       head;
  logic       head_valid, pop;
  logic [N_UNITS-1:0] busy;
  logic [31:0] completed;
  logic [3:0]  last_op;
  logic [$clog2(CMD_DEPTH+1)-1:0] cnt;
  opcode_e    op;
  mem_cmd_t   hm;
  assign hm = mem_cmd_t'(head.arg);
  int unsigned tgt;
  logic       immediate;
  logic [3:0] done_op [N_UNITS];

  sync_fifo #(.T(cmd_t), .DEPTH(CMD_DEPTH)) u_fifo (
    .clk, .rst, .in_valid(cmd_valid), .in_ready(cmd_ready), .in(cmd),
    .out_valid(head_valid), .out_ready(pop), .out(head), .count(cnt)
  );

  always_comb begin
    op        = head.op;
    immediate = 1'b0;
    tgt       = 0;
    unique case (op)
      OP_LOAD, OP_STORE: tgt = U_MEM0 + 32'(hm.ch);
      OP_FILL:           tgt = U_FILL;
      OP_EDGE:           tgt = U_EDGE;
      OP_VERTEX:         tgt = U_VERT;
      OP_UPDATE:         tgt = U_UPD;
      default:           immediate = 1'b1;     // NOP, CFG, BARRIER
    endcase
    barrier_wait = head_valid && op == OP_BARRIER && (busy != '0);
    issue = '0;
    pop   = 1'b0;
    if (head_valid) begin
      if (immediate) pop = !barrier_wait;
      else if (!busy[tgt]) begin
        pop = 1'b1;
        issue[tgt] = 1'b1;
      end
    end
    cfg_we      = pop && op == OP_CFG;
    issue_store = (op == OP_STORE);
    issue_cmd   = head;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= '0; completed <= '0; last_op <= '0;
    end else begin
      int unsigned n;
      n = 0;
      for (int u = 0; u < N_UNITS; u++) begin
        if (unit_done[u]) begin
          n = n + 1;
          last_op <= done_op[u];
        end
      end
      if (pop && immediate) begin
        n = n + 1;
        last_op <= op;
      end
      completed <= completed + n;
      busy <= (busy & ~unit_done) | issue;
      for (int u = 0; u < N_UNITS; u++) if (issue[u]) done_op[u] <= op;
    end
  end

  assign status = {busy, 20'd0, last_op, completed};

`ifndef SYNTHESIS
  // A unit only reports completion of a command it was given.
  a_done_busy: assert property (@(posedge clk) disable iff (rst) (unit_done & ~busy) == '0);
`endif
endmodule
