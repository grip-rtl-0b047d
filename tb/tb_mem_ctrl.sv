// tb_mem_ctrl: the memory controller with four behavioural DRAM channels
// (dram_model, random back-pressure) and real nodeflow source and destination
// banks. Random LOADs to source features, source edge memory, destination
// features and the global weight buffer run on all channels at once; every
// buffer write is logged and compared with the DRAM contents. Two channels
// loading the weight buffer at the same time must serialise (one writer at a
// time, both transfers complete). STOREs of source-bank features are checked in
// DRAM afterwards.
module tb_mem_ctrl;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, store = 0;
  mem_cmd_t cmd;
  logic [3:0] done, req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr [4];
  line_t req_wdata [4], rsp_data [4], st_data [4], wdata [4];
  logic [3:0] src_we, src_edge, st_re, dst_we;
  logic [7:0] src_addr [4], st_addr [4];
  logic [5:0] dst_addr [4];
  logic gwb_we;
  logic [14:0] gwb_addr;
  line_t gwb_data;

  mem_ctrl dut (.clk, .rst, .start, .store, .cmd, .done, .req_valid, .req_ready, .req_we, .req_addr,
    .req_wdata, .rsp_valid, .rsp_data, .src_we, .src_edge, .src_addr, .st_re, .st_addr, .st_data,
    .dst_we, .dst_addr, .wdata, .gwb_we, .gwb_addr, .gwb_data);

  for (genvar i = 0; i < 4; i++) begin : g_ch
    dram_model #(.LAT(6 + 3 * i), .READY_PCT(50 + 10 * i), .SEED(i)) dram (.clk, .rst,
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req_we(req_we[i]), .req_addr(req_addr[i]),
      .req_wdata(req_wdata[i]), .rsp_valid(rsp_valid[i]), .rsp_data(rsp_data[i]));
    nf_src_bank sb (.clk, .ld_we(src_we[i]), .ld_edge(src_edge[i]), .ld_addr(src_addr[i]), .ld_data(wdata[i]),
      .st_re(st_re[i]), .st_addr(st_addr[i]), .st_data(st_data[i]), .up_we(1'b0), .up_addr(8'd0), .up_data('0),
      .edge_re(1'b0), .edge_addr(10'd0), .edge_data(), .feat_re(1'b0), .feat_addr(8'd0), .feat_data());
    nf_dst_bank db (.clk, .ld_we(dst_we[i]), .ld_addr(dst_addr[i]), .ld_data(wdata[i]),
      .rd_re(1'b0), .rd_addr(6'd0), .rd_data());
  end

  function automatic line_t init_line(int unsigned seed, int unsigned a);
    line_t l;
    for (int k = 0; k < 32; k++) l[16*k +: 16] = 16'(((a * 37 + k * 11 + seed * 101) % 509) - 254);
    return l;
  endfunction

  // write logs
  line_t lf [4][256], le [4][64], ld [4][64];
  line_t lg [int];
  int gw_writes = 0;
  logic [3:0] gwb_users;
  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < 4; i++) begin
      if (src_we[i] && !src_edge[i]) lf[i][src_addr[i]] = wdata[i];
      if (src_we[i] && src_edge[i]) le[i][src_addr[i][5:0]] = wdata[i];
      if (dst_we[i]) ld[i][dst_addr[i]] = wdata[i];
    end
    if (gwb_we) begin lg[int'(gwb_addr)] = gwb_data; gw_writes++; end
    checks++;
    if ($countones(dut.g_we) > 1 && !gwb_we) begin failures++; $display("FAIL weight write dropped"); end
  end

  int nd [4];
  always @(posedge clk) for (int i = 0; i < 4; i++) if (done[i]) nd[i]++;

  task automatic issue(input int ch, input mem_target_e t, input int da, input int ba, input int cnt, input bit st);
    @(negedge clk);
    cmd = '0; cmd.ch = 2'(ch); cmd.target = t; cmd.dram_addr = 32'(da); cmd.buf_addr = 16'(ba); cmd.count = 16'(cnt);
    start = 1; store = st;
    @(negedge clk) start = 0; store = 0;
  endtask

  task automatic wait_all(input int n0, input int n1, input int n2, input int n3);
    int guard = 0;
    while ((nd[0] < n0 || nd[1] < n1 || nd[2] < n2 || nd[3] < n3) && guard < 20000) begin @(negedge clk); guard++; end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) nd[i] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    // round 1: different target per channel
    issue(0, T_SRC_FEAT, 100, 10, 120, 0);
    issue(1, T_SRC_EDGE, 2000, 0, 64, 0);
    issue(2, T_DST_FEAT, 50, 5, 40, 0);
    issue(3, T_GWB, 7000, 300, 90, 0);
    wait_all(1, 1, 1, 1);
    for (int a = 0; a < 120; a++) begin checks++; if (lf[0][10 + a] !== init_line(0, 100 + a)) failures++; end
    for (int a = 0; a < 64; a++) begin checks++; if (le[1][a] !== init_line(1, 2000 + a)) failures++; end
    for (int a = 0; a < 40; a++) begin checks++; if (ld[2][5 + a] !== init_line(2, 50 + a)) failures++; end
    for (int a = 0; a < 90; a++) begin checks++; if (!lg.exists(300 + a) || lg[300 + a] !== init_line(3, 7000 + a)) failures++; end
    // round 2: two channels load the weight buffer at once
    gw_writes = 0;
    issue(1, T_GWB, 0, 1000, 70, 0);
    issue(2, T_GWB, 500, 2000, 70, 0);
    issue(0, T_SRC_FEAT, 300, 130, 100, 0);
    wait_all(2, 2, 2, 1);
    checks++;
    if (gw_writes != 140) begin failures++; $display("FAIL %0d weight writes", gw_writes); end
    for (int a = 0; a < 70; a++) begin
      checks += 2;
      if (!lg.exists(1000 + a) || lg[1000 + a] !== init_line(1, a)) failures++;
      if (!lg.exists(2000 + a) || lg[2000 + a] !== init_line(2, 500 + a)) failures++;
    end
    // round 3: store features of banks 0 and 3 (bank 3 filled first)
    issue(3, T_SRC_FEAT, 40, 0, 30, 0);
    wait_all(2, 2, 2, 2);
    issue(0, T_SRC_FEAT, 9000, 20, 200, 1);
    issue(3, T_SRC_FEAT, 9500, 0, 30, 1);
    issue(2, T_DST_FEAT, 0, 0, 0, 0);     // zero-length transfer
    wait_all(3, 2, 3, 3);
    for (int a = 0; a < 200; a++) begin checks++; if (g_ch[0].dram.peek(9000 + a) !== lf[0][20 + a]) failures++; end
    for (int a = 0; a < 30; a++) begin checks++; if (g_ch[3].dram.peek(9500 + a) !== init_line(3, 40 + a)) failures++; end
    checks++;
    if (nd[0] != 3 || nd[1] != 2 || nd[2] != 3 || nd[3] != 3) begin failures++; $display("FAIL done counts %0d %0d %0d %0d", nd[0], nd[1], nd[2], nd[3]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
