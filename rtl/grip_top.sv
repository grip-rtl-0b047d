// grip_top: the GRIP graph-neural-network inference accelerator.
//
// GRIP runs a GNN layer as three phases, each on its own unit with its own
// memories: edge-accumulate (edge unit: gather and reduce over the edges of a
// nodeflow partition into the edge accumulator), vertex-accumulate (vertex unit:
// multiply the edge-accumulator tile by a weight tile and add into the vertex
// accumulator) and vertex-update (update unit: activation, written back as
// features or as another program's accumulator). A host drives everything with
// commands; the memory controller moves nodeflow partitions, features and
// weights in bulk; the weight sequencer keeps weight tiles flowing from the
// global weight buffer through the tile buffer into the multiplier array. The
// block structure and the connections are the paper's (its overview figure);
// the command set, memory layouts and handshakes are this design's.
//
// Ports: the host command queue and status register; one request/response port
// per DRAM channel (the DRAM controllers and devices are outside this design);
// events pulses, one bit per mechanism, for performance counting:
//   [0] vertex unit waited for weights, [1] reduce-lane forwarding,
//   [2] crossbar arbitration conflict, [3] control unit held by a barrier,
//   [4] a parallel-mode (2 x 16x16) input entered the array,
//   [5] a cooperative-mode (16x32) input entered the array.
module grip_top
  import grip_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  // host
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  cmd_t            cmd,
  output logic [63:0]     status,
  // DRAM channels
  output logic [N_PF-1:0] dram_req_valid,
  input  logic [N_PF-1:0] dram_req_ready,
  output logic [N_PF-1:0] dram_req_we,
  output logic [31:0]     dram_req_addr [N_PF],
  output line_t           dram_req_wdata [N_PF],
  input  logic [N_PF-1:0] dram_rsp_valid,
  input  line_t           dram_rsp_data [N_PF],
  // performance events
  output logic [5:0]      events
);
  // ---------------------------------------------------------------- control
  logic [N_UNITS-1:0] issue, unit_done;
  logic               issue_store, cfg_we, barrier_wait;
  cmd_t               icmd;
  cfg_cmd_t           ccfg;
  assign ccfg = cfg_cmd_t'(icmd.arg);

  control_unit u_ctrl (
    .clk, .rst, .cmd_valid, .cmd_ready, .cmd, .status,
    .issue, .issue_store, .issue_cmd(icmd), .unit_done, .cfg_we, .barrier_wait
  );

  // ---------------------------------------------------------------- memory controller
  logic [N_PF-1:0] mc_done, mc_src_we, mc_src_edge, mc_st_re, mc_dst_we;
  logic [7:0]      mc_src_addr [N_PF];
  logic [7:0]      mc_st_addr [N_PF];
  line_t           mc_st_data [N_PF];
  logic [5:0]      mc_dst_addr [N_PF];
  line_t           mc_wdata [N_PF];
  logic            gwb_we;
  logic [14:0]     gwb_waddr;
  line_t           gwb_wdata;

  mem_ctrl u_mc (
    .clk, .rst, .start(|issue[U_MEM0 +: N_PF]), .store(issue_store), .cmd(mem_cmd_t'(icmd.arg)),
    .done(mc_done),
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_we(dram_req_we),
    .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data),
    .src_we(mc_src_we), .src_edge(mc_src_edge), .src_addr(mc_src_addr),
    .st_re(mc_st_re), .st_addr(mc_st_addr), .st_data(mc_st_data),
    .dst_we(mc_dst_we), .dst_addr(mc_dst_addr), .wdata(mc_wdata),
    .gwb_we, .gwb_addr(gwb_waddr), .gwb_data(gwb_wdata)
  );

  // ---------------------------------------------------------------- nodeflow buffer
  logic [N_PF-1:0] pf_edge_re, pf_feat_re;
  logic [9:0]      pf_edge_addr [N_PF];
  logic [31:0]     pf_edge_data [N_PF];
  logic [7:0]      pf_feat_addr [N_PF];
  line_t           pf_feat_data [N_PF];
  logic [M_RD-1:0] rl_dst_re;
  logic [5:0]      rl_dst_addr [M_RD];
  line_t           rl_dst_data [M_RD];
  logic [N_PF-1:0] up_nf_we;
  logic [7:0]      up_nf_addr;
  line_t           up_wdata;

  for (genvar i = 0; i < N_PF; i++) begin : g_src
    nf_src_bank u_bank (
      .clk,
      .ld_we(mc_src_we[i]), .ld_edge(mc_src_edge[i]), .ld_addr(mc_src_addr[i]), .ld_data(mc_wdata[i]),
      .st_re(mc_st_re[i]), .st_addr(mc_st_addr[i]), .st_data(mc_st_data[i]),
      .up_we(up_nf_we[i]), .up_addr(up_nf_addr), .up_data(up_wdata),
      .edge_re(pf_edge_re[i]), .edge_addr(pf_edge_addr[i]), .edge_data(pf_edge_data[i]),
      .feat_re(pf_feat_re[i]), .feat_addr(pf_feat_addr[i]), .feat_data(pf_feat_data[i])
    );
  end
  for (genvar j = 0; j < M_RD; j++) begin : g_dst
    nf_dst_bank u_bank (
      .clk, .ld_we(mc_dst_we[j]), .ld_addr(mc_dst_addr[j]), .ld_data(mc_wdata[j]),
      .rd_re(rl_dst_re[j]), .rd_addr(rl_dst_addr[j]), .rd_data(rl_dst_data[j])
    );
  end

  // ---------------------------------------------------------------- edge unit + edge accumulator
  logic            ea_done, ea_clr, ea_clr_set, xbar_conflict;
  logic [M_RD-1:0] acc_re, acc_rd_first, acc_we, rl_bypass;
  logic            acc_rd_set [M_RD];
  logic [2:0]      acc_rd_idx [M_RD];
  line_t           acc_rd_data [M_RD];
  logic            acc_wr_set [M_RD];
  logic [2:0]      acc_wr_idx [M_RD];
  line_t           acc_wr_data [M_RD];
  logic [M_RD-1:0] up_ea_we;
  logic            up_ea_set;
  logic [2:0]      up_ea_idx;
  logic            va_ea_set;
  logic [1:0]      va_ea_row [M_RD];
  logic [1:0]      va_ea_chunk;
  logic [16*DATA_W-1:0] va_ea_data [M_RD];

  edge_unit u_edge (
    .clk, .rst, .start(issue[U_EDGE]), .cmd(ea_cmd_t'(icmd.arg)), .done(ea_done),
    .edge_re(pf_edge_re), .edge_addr(pf_edge_addr), .edge_data(pf_edge_data),
    .feat_re(pf_feat_re), .feat_addr(pf_feat_addr), .feat_data(pf_feat_data),
    .dst_re(rl_dst_re), .dst_addr(rl_dst_addr), .dst_data(rl_dst_data),
    .acc_clr(ea_clr), .acc_clr_set(ea_clr_set),
    .acc_re, .acc_rd_set, .acc_rd_idx, .acc_rd_data, .acc_rd_first,
    .acc_we, .acc_wr_set, .acc_wr_idx, .acc_wr_data,
    .xbar_conflict, .bypass(rl_bypass)
  );

  for (genvar j = 0; j < M_RD; j++) begin : g_eacc
    eacc_bank u_eacc (
      .clk, .rst, .clr(ea_clr), .clr_set(ea_clr_set),
      .rd_re(acc_re[j]), .rd_set(acc_rd_set[j]), .rd_idx(acc_rd_idx[j]),
      .rd_data(acc_rd_data[j]), .rd_first(acc_rd_first[j]),
      .wr_we(acc_we[j]), .wr_set(acc_wr_set[j]), .wr_idx(acc_wr_idx[j]), .wr_data(acc_wr_data[j]),
      .up_we(up_ea_we[j]), .up_set(up_ea_set), .up_idx(up_ea_idx), .up_data(up_wdata),
      .va_set(va_ea_set), .va_row(va_ea_row[j]), .va_chunk(va_ea_chunk), .va_data(va_ea_data[j])
    );
  end

  // ---------------------------------------------------------------- weights
  logic                    gwb_re, tb_we, tb_wsel, tb_re, tb_rsel;
  logic [13:0]             gwb_raddr;
  logic [WRD_W*DATA_W-1:0] gwb_rdata, tb_wdata, tb_rdata, ld_word;
  logic [8:0]              tb_waddr, tb_raddr;
  logic                    ld_en, ld_bank, ld_par, release_bank, fill_done;
  logic [2:0]              ld_idx;
  logic [1:0]              mat_busy, wfull;

  global_weight_buffer u_gwb (
    .clk, .wr_en(gwb_we), .wr_addr(gwb_waddr), .wr_data(gwb_wdata),
    .rd_en(gwb_re), .rd_addr(gwb_raddr), .rd_data(gwb_rdata)
  );
  tile_buffer u_tile (
    .clk, .wr_en(tb_we), .wr_sel(tb_wsel), .wr_addr(tb_waddr), .wr_data(tb_wdata),
    .rd_en(tb_re), .rd_sel(tb_rsel), .rd_addr(tb_raddr), .rd_data(tb_rdata)
  );
  weight_seq u_wseq (
    .clk, .rst,
    .fill_start(issue[U_FILL]), .fill_cmd(fill_cmd_t'(icmd.arg)), .fill_done,
    .gwb_re, .gwb_addr(gwb_raddr), .gwb_data(gwb_rdata),
    .tb_we, .tb_wsel, .tb_waddr, .tb_wdata,
    .feed_start(issue[U_VERT]), .feed_cmd(va_cmd_t'(icmd.arg)),
    .tb_re, .tb_rsel, .tb_raddr, .tb_rdata,
    .ld_en, .ld_bank, .ld_par, .ld_idx, .ld_word,
    .mat_busy, .release_bank, .wfull
  );

  // ---------------------------------------------------------------- vertex unit
  logic        va_done, wstall, mx_valid, mx_par, mx_bank, my_valid;
  logic [PE_ROWS*DATA_W-1:0] mx_x0, mx_x1;
  line_t       my_y;
  logic        vacc_set;
  logic [3:0]  vacc_a_v, vacc_b_v, vacc_ch;
  line_t       vacc_a_rdata, vacc_b_rdata, vacc_a_wdata, vacc_b_wdata;
  logic [1:0]  vacc_a_we, vacc_b_we;

  mat_array u_mat (
    .clk, .rst, .ld_en, .ld_bank, .ld_par, .ld_idx, .ld_word, .busy(mat_busy),
    .in_valid(mx_valid), .in_par(mx_par), .in_bank(mx_bank), .in_x0(mx_x0), .in_x1(mx_x1),
    .out_valid(my_valid), .out_y(my_y)
  );
  vertex_unit u_vert (
    .clk, .rst, .start(issue[U_VERT]), .cmd(va_cmd_t'(icmd.arg)), .done(va_done),
    .wfull, .release_bank, .wstall,
    .mx_valid, .mx_par, .mx_bank, .mx_x0, .mx_x1, .my_valid, .my_y,
    .ea_set(va_ea_set), .ea_row(va_ea_row), .ea_chunk(va_ea_chunk), .ea_data(va_ea_data),
    .va_set(vacc_set), .va_a_v(vacc_a_v), .va_b_v(vacc_b_v), .va_ch(vacc_ch),
    .va_a_rdata(vacc_a_rdata), .va_b_rdata(vacc_b_rdata),
    .va_a_we(vacc_a_we), .va_b_we(vacc_b_we), .va_a_wdata(vacc_a_wdata), .va_b_wdata(vacc_b_wdata)
  );

  // ---------------------------------------------------------------- vertex accumulator + update unit
  logic        up_done, up_rd_set, up_va_we, up_va_set;
  logic [3:0]  up_rd_v, up_rd_ch, up_va_v, up_va_ch;
  line_t       up_rd_data;

  vacc u_vacc (
    .clk,
    .a_set(vacc_set), .b_set(vacc_set), .rd_set(up_rd_set), .wr_set(up_va_set),
    .a_v(vacc_a_v), .b_v(vacc_b_v), .rd_v(up_rd_v), .wr_v(up_va_v),
    .a_ch(vacc_ch), .b_ch(vacc_ch), .rd_ch(up_rd_ch), .wr_ch(up_va_ch),
    .a_rdata(vacc_a_rdata), .b_rdata(vacc_b_rdata), .rd_data(up_rd_data),
    .a_we(vacc_a_we), .b_we(vacc_b_we), .a_wdata(vacc_a_wdata), .b_wdata(vacc_b_wdata),
    .wr_we(up_va_we), .wr_data(up_wdata)
  );
  update_unit u_upd (
    .clk, .rst, .start(issue[U_UPD]), .cmd(upd_cmd_t'(icmd.arg)), .done(up_done),
    .cfg_we, .cfg_addr(ccfg.addr), .cfg_data(ccfg.data),
    .rd_set(up_rd_set), .rd_v(up_rd_v), .rd_ch(up_rd_ch), .rd_data(up_rd_data),
    .nf_we(up_nf_we), .nf_addr(up_nf_addr),
    .ea_we(up_ea_we), .ea_set(up_ea_set), .ea_idx(up_ea_idx),
    .va_we(up_va_we), .va_set(up_va_set), .va_v(up_va_v), .va_ch(up_va_ch),
    .wdata(up_wdata)
  );

  assign unit_done = {up_done, va_done, ea_done, fill_done, mc_done};
  assign events = {mx_valid && !mx_par, mx_valid && mx_par, barrier_wait, xbar_conflict, |rl_bypass, wstall};
endmodule
