// edge_unit: the edge-accumulate phase.
//
// N prefetch lanes (one per nodeflow source bank and DRAM channel) walk the
// edges of one partition column, each over its own bank; an N x M crossbar
// carries each edge's source-feature beats to the reduce lane that owns the
// destination vertex; M reduce lanes gather and reduce into the edge accumulator
// half selected by the command. This lane split and the crossbar are the paper's
// (its alternative, duplicating whole edge pipelines, would need 2N ports on one
// nodeflow buffer).
//
// A command (grip_pkg::ea_cmd_t) is taken with start; if clear is set the target
// half is emptied first. done pulses once every prefetch lane has finished and
// the crossbar and all reduce lanes are empty. xbar_conflict and bypass report
// arbitration losses and accumulator forwarding for performance counting.
module edge_unit
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  ea_cmd_t     cmd,
  output logic        done,
  // nodeflow source banks
  output logic [N_PF-1:0] edge_re,
  output logic [9:0]      edge_addr [N_PF],
  input  logic [31:0]     edge_data [N_PF],
  output logic [N_PF-1:0] feat_re,
  output logic [7:0]      feat_addr [N_PF],
  input  line_t           feat_data [N_PF],
  // nodeflow destination banks
  output logic [M_RD-1:0] dst_re,
  output logic [5:0]      dst_addr [M_RD],
  input  line_t           dst_data [M_RD],
  // edge accumulator banks
  output logic            acc_clr,
  output logic            acc_clr_set,
  output logic [M_RD-1:0] acc_re,
  output logic            acc_rd_set [M_RD],
  output logic [2:0]      acc_rd_idx [M_RD],
  input  line_t           acc_rd_data [M_RD],
  input  logic [M_RD-1:0] acc_rd_first,
  output logic [M_RD-1:0] acc_we,
  output logic            acc_wr_set [M_RD],
  output logic [2:0]      acc_wr_idx [M_RD],
  output line_t           acc_wr_data [M_RD],
  // events
  output logic            xbar_conflict,
  output logic [M_RD-1:0] bypass
);
  ea_cmd_t c;
  logic running;
  logic [N_PF-1:0] pf_done, pf_fin;
  logic [N_PF-1:0] pf_valid, pf_ready;
  edge_msg_t       pf_msg [N_PF];
  logic [M_RD-1:0] rl_valid, rl_ready, rl_busy;
  edge_msg_t       rl_msg [M_RD];
  logic            start_q;

  always_ff @(posedge clk) begin
    done    <= 1'b0;
    start_q <= 1'b0;
    if (rst) begin
      running <= 1'b0;
      pf_fin  <= '0;
    end else if (!running && start) begin
      c       <= cmd;
      running <= 1'b1;
      start_q <= 1'b1;
      pf_fin  <= '0;
    end else if (running) begin
      pf_fin <= pf_fin | pf_done;
      if (&pf_fin && !(|pf_valid) && !(|rl_busy) && !start_q) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  assign acc_clr     = start_q && c.clear;
  assign acc_clr_set = c.eset;

  for (genvar i = 0; i < N_PF; i++) begin : g_pf
    prefetch_lane u_pf (
      .clk, .rst, .start(start_q),
      .vlist_base(c.vlist_base), .n_src(c.n_src[8*i +: 8]), .feat_off(c.feat_off), .beats(c.beats),
      .done(pf_done[i]),
      .edge_re(edge_re[i]), .edge_addr(edge_addr[i]), .edge_data(edge_data[i]),
      .feat_re(feat_re[i]), .feat_addr(feat_addr[i]), .feat_data(feat_data[i]),
      .out_valid(pf_valid[i]), .out_ready(pf_ready[i]), .out(pf_msg[i])
    );
  end

  xbar #(.N(N_PF), .M(M_RD)) u_xbar (
    .clk, .rst,
    .in_valid(pf_valid), .in_ready(pf_ready), .in_msg(pf_msg),
    .out_valid(rl_valid), .out_ready(rl_ready), .out_msg(rl_msg),
    .conflict(xbar_conflict)
  );

  for (genvar j = 0; j < M_RD; j++) begin : g_rl
    reduce_lane u_rl (
      .clk, .rst,
      .use_r0(c.use_r0), .gop(c.gop), .rop(c.rop), .gconst(c.gconst), .eset(c.eset),
      .dst_base(c.dst_base), .dst_stride(c.dst_stride),
      .in_valid(rl_valid[j]), .in_ready(rl_ready[j]), .in_msg(rl_msg[j]),
      .dst_re(dst_re[j]), .dst_addr(dst_addr[j]), .dst_data(dst_data[j]),
      .acc_re(acc_re[j]), .acc_rd_set(acc_rd_set[j]), .acc_rd_idx(acc_rd_idx[j]),
      .acc_rd_data(acc_rd_data[j]), .acc_rd_first(acc_rd_first[j]),
      .acc_we(acc_we[j]), .acc_wr_set(acc_wr_set[j]), .acc_wr_idx(acc_wr_idx[j]), .acc_wr_data(acc_wr_data[j]),
      .busy(rl_busy[j]), .bypass(bypass[j])
    );
  end
endmodule
