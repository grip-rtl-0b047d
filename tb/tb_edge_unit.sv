// tb_edge_unit: runs edge_unit over random nodeflow partitions spread over
// the four source banks and compares the resulting edge-accumulator tile with a
// reference gather/reduce over the same edges. Covers sum, max and mean, the
// optional R0 stage, back-to-back commands into both accumulator halves, and
// checks that crossbar conflicts and accumulator forwarding both occurred.
module tb_edge_unit;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done;
  ea_cmd_t cmd;
  logic [3:0] edge_re, feat_re, dst_re, acc_re, acc_rd_first, acc_we, bypass;
  logic [9:0] edge_addr [4];
  logic [31:0] edge_data [4];
  logic [7:0] feat_addr [4];
  line_t feat_data [4];
  logic [5:0] dst_addr [4];
  line_t dst_data [4];
  logic acc_clr, acc_clr_set, xbar_conflict;
  logic acc_rd_set [4], acc_wr_set [4];
  logic [2:0] acc_rd_idx [4], acc_wr_idx [4];
  line_t acc_rd_data [4], acc_wr_data [4];
  logic [3:0] sld_we = 0, dld_we = 0;
  logic sld_edge = 0;
  logic [7:0] ld_addr = 0;
  line_t ld_data = '0;
  logic va_set = 0;
  logic [1:0] va_row = 0, va_chunk = 0;
  logic [255:0] va_data [4];

  edge_unit dut (.*);
  for (genvar i = 0; i < 4; i++) begin : g_mem
    nf_src_bank sb (.clk, .ld_we(sld_we[i]), .ld_edge(sld_edge), .ld_addr, .ld_data,
      .st_re(1'b0), .st_addr(8'd0), .st_data(), .up_we(1'b0), .up_addr(8'd0), .up_data('0),
      .edge_re(edge_re[i]), .edge_addr(edge_addr[i]), .edge_data(edge_data[i]),
      .feat_re(feat_re[i]), .feat_addr(feat_addr[i]), .feat_data(feat_data[i]));
    nf_dst_bank db (.clk, .ld_we(dld_we[i]), .ld_addr(ld_addr[5:0]), .ld_data,
      .rd_re(dst_re[i]), .rd_addr(dst_addr[i]), .rd_data(dst_data[i]));
    eacc_bank eb (.clk, .rst, .clr(acc_clr), .clr_set(acc_clr_set),
      .rd_re(acc_re[i]), .rd_set(acc_rd_set[i]), .rd_idx(acc_rd_idx[i]), .rd_data(acc_rd_data[i]), .rd_first(acc_rd_first[i]),
      .wr_we(acc_we[i]), .wr_set(acc_wr_set[i]), .wr_idx(acc_wr_idx[i]), .wr_data(acc_wr_data[i]),
      .up_we(1'b0), .up_set(1'b0), .up_idx(3'd0), .up_data('0),
      .va_set, .va_row, .va_chunk, .va_data(va_data[i]));
  end

  int nconf = 0, nbyp = 0;
  always @(posedge clk) begin
    if (xbar_conflict) nconf++;
    if (|bypass) nbyp++;
  end

  int hv [12][64];
  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic run(input gather_op_e g, input reduce_op_e r, input bit r0, input bit set);
    logic [31:0] ew [4][1024];
    line_t ft [4][256];
    int acc [12][64];
    bit seen [12];
    int nsrc [4];
    for (int v = 0; v < 12; v++) seen[v] = 0;
    for (int i = 0; i < 4; i++) begin
      int ne = 0;
      for (int w = 0; w < 1024; w++) ew[i][w] = '0;
      nsrc[i] = $urandom_range(2, 12);
      for (int s = 0; s < nsrc[i]; s++) begin
        vlist_t vl;
        int cnt;
        cnt = $urandom_range(0, 5);
        vl = '0; vl.feat_addr = 8'(4 * s); vl.first = 10'(256 + ne); vl.count = 8'(cnt);
        ew[i][s] = vl;
        for (int b = 0; b < 4; b++) for (int e = 0; e < 32; e++) ft[i][4 * s + b][16*e +: 16] = 16'($urandom_range(0, 511) - 256);
        for (int k = 0; k < cnt; k++) begin
          erec_t er;
          int d;
          d = $urandom_range(0, 11);
          er = '0; er.dst = 4'(d); er.coef = elem_t'($urandom_range(20, 100));
          ew[i][256 + ne] = er; ne++;
          for (int el = 0; el < 64; el++) begin
            int u, x;
            u = int'(signed'(ft[i][4 * s + 1 + el / 32][16*(el % 32) +: 16]));   // feat_off = 1
            case (g)
              G_SRC: x = u;
              G_ADD: x = sat(u + hv[d][el]);
              G_MUL: x = sat((u * hv[d][el]) >>> 8);
              G_SCALE: x = sat((64 * u) >>> 8);
              default: x = hv[d][el];
            endcase
            if (r == R_MEAN) x = sat((int'(er.coef) * x) >>> 8);
            if (!seen[d]) acc[d][el] = x;
            else if (r == R_MAX) acc[d][el] = (x > acc[d][el]) ? x : acc[d][el];
            else acc[d][el] = acc[d][el] + x;
          end
          seen[d] = 1;
        end
      end
      // load bank i
      for (int row = 0; row < 64; row++) begin
        @(negedge clk);
        sld_we = 4'(1 << i); sld_edge = 1; ld_addr = 8'(row);
        for (int w = 0; w < 16; w++) ld_data[32*w +: 32] = ew[i][16*row + w];
      end
      for (int a = 0; a < 4 * nsrc[i]; a++) begin
        @(negedge clk);
        sld_we = 4'(1 << i); sld_edge = 0; ld_addr = 8'(a); ld_data = ft[i][a];
      end
      @(negedge clk) sld_we = 0;
    end
    cmd = '0;
    cmd.eset = set; cmd.clear = 1; cmd.use_r0 = r0; cmd.gop = g; cmd.rop = r; cmd.gconst = 16'sd64;
    cmd.vlist_base = 0; cmd.feat_off = 1; cmd.beats = 2; cmd.dst_base = 0; cmd.dst_stride = 2;
    for (int i = 0; i < 4; i++) cmd.n_src[8*i +: 8] = 8'(nsrc[i]);
    start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    va_set = set;
    for (int v = 0; v < 12; v++) for (int c = 0; c < 4; c++) begin
      va_row = 2'(v / 4); va_chunk = 2'(c); #1;
      for (int e = 0; e < 16; e++) begin
        int exp_v;
        exp_v = seen[v] ? acc[v][16*c + e] : 0;
        checks++;
        if (int'(signed'(va_data[v % 4][16*e +: 16])) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL g=%0d r=%0d v=%0d el=%0d got %0d exp %0d", g, r, v, 16*c + e, signed'(va_data[v % 4][16*e +: 16]), exp_v);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    // destination features: vertex v in lane v%4, row v/4, lines row*2 + beat
    for (int v = 0; v < 12; v++) for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      for (int e = 0; e < 32; e++) begin
        hv[v][32*b + e] = $urandom_range(0, 511) - 256;
        ld_data[16*e +: 16] = 16'(hv[v][32*b + e]);
      end
      dld_we = 4'(1 << (v % 4)); ld_addr = 8'((v / 4) * 2 + b);
    end
    @(negedge clk) dld_we = 0;
    run(G_SRC, R_SUM, 0, 0);
    run(G_SRC, R_MAX, 0, 1);
    run(G_SCALE, R_MEAN, 0, 0);
    run(G_ADD, R_SUM, 1, 1);
    run(G_MUL, R_MAX, 1, 0);
    checks += 2;
    if (nconf == 0) begin failures++; $display("FAIL no crossbar conflict"); end
    if (nbyp == 0) begin failures++; $display("FAIL no forwarding"); end
    $display("INFO conflicts=%0d bypass=%0d", nconf, nbyp);
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
