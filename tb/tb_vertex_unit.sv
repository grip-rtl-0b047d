// tb_vertex_unit: runs the vertex-accumulate datapath (vertex_unit, weight_seq
// feed, tile_buffer, mat_array, vacc and four eacc_bank instances) on random
// tiles and compares the vertex accumulator with a reference model of the same
// fixed-point arithmetic: per 16-input block, products are summed exactly,
// shifted to Q8.8 and saturated, then added into the accumulator with
// saturation. Commands cover cooperative and parallel mode, odd vertex counts in
// parallel mode, o_first offsets, init and accumulate-on-previous, and both
// accumulator halves. Weight-wait stalls must occur.
module tb_vertex_unit;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done, release_bank, wstall;
  va_cmd_t cmd;
  logic [1:0] wfull, mat_busy;
  logic mx_valid, mx_par, mx_bank, my_valid;
  logic [PE_ROWS*DATA_W-1:0] mx_x0, mx_x1;
  line_t my_y;
  logic ea_set;
  logic [1:0] ea_row [M_RD];
  logic [1:0] ea_chunk;
  logic [16*DATA_W-1:0] ea_data [M_RD];
  logic va_set;
  logic [3:0] va_a_v, va_b_v, va_ch;
  line_t va_a_rdata, va_b_rdata, va_a_wdata, va_b_wdata;
  logic [1:0] va_a_we, va_b_we;

  vertex_unit dut (.*);

  // weight path
  logic tb_re, tb_rsel, ld_en, ld_bank, ld_par;
  logic [8:0] tb_raddr;
  logic [2:0] ld_idx;
  logic [WRD_W*DATA_W-1:0] tb_rdata, ld_word;
  logic t_we = 0, t_sel = 0;
  logic [8:0] t_addr = 0;
  logic [WRD_W*DATA_W-1:0] t_data = '0;
  weight_seq ws (.clk, .rst, .fill_start(1'b0), .fill_cmd('0), .fill_done(), .gwb_re(), .gwb_addr(),
    .gwb_data('0), .tb_we(), .tb_wsel(), .tb_waddr(), .tb_wdata(),
    .feed_start(start), .feed_cmd(cmd), .tb_re, .tb_rsel, .tb_raddr, .tb_rdata,
    .ld_en, .ld_bank, .ld_par, .ld_idx, .ld_word, .mat_busy, .release_bank, .wfull);
  tile_buffer tbuf (.clk, .wr_en(t_we), .wr_sel(t_sel), .wr_addr(t_addr), .wr_data(t_data),
    .rd_en(tb_re), .rd_sel(tb_rsel), .rd_addr(tb_raddr), .rd_data(tb_rdata));
  mat_array ma (.clk, .rst, .ld_en, .ld_bank, .ld_par, .ld_idx, .ld_word, .busy(mat_busy),
    .in_valid(mx_valid), .in_par(mx_par), .in_bank(mx_bank), .in_x0(mx_x0), .in_x1(mx_x1),
    .out_valid(my_valid), .out_y(my_y));
  logic rd_set = 0;
  logic [3:0] rd_v = 0, rd_ch = 0;
  line_t rd_data;
  vacc va (.clk, .a_set(va_set), .b_set(va_set), .rd_set, .wr_set(1'b0),
    .a_v(va_a_v), .b_v(va_b_v), .rd_v, .wr_v(4'd0), .a_ch(va_ch), .b_ch(va_ch), .rd_ch, .wr_ch(4'd0),
    .a_rdata(va_a_rdata), .b_rdata(va_b_rdata), .rd_data, .a_we(va_a_we), .b_we(va_b_we),
    .a_wdata(va_a_wdata), .b_wdata(va_b_wdata), .wr_we(1'b0), .wr_data('0));
  logic e_we = 0, e_set = 0;
  logic [2:0] e_idx = 0;
  line_t e_data = '0;
  logic [3:0] e_lane = 0;
  for (genvar i = 0; i < 4; i++) begin : g_ea
    eacc_bank eb (.clk, .rst, .clr(1'b0), .clr_set(1'b0),
      .rd_re(1'b0), .rd_set(1'b0), .rd_idx(3'd0), .rd_data(), .rd_first(),
      .wr_we(e_we && e_lane == 4'(i)), .wr_set(e_set), .wr_idx(e_idx), .wr_data(e_data),
      .up_we(1'b0), .up_set(1'b0), .up_idx(3'd0), .up_data('0),
      .va_set(ea_set), .va_row(ea_row[i]), .va_chunk(ea_chunk), .va_data(ea_data[i]));
  end

  int nstall = 0;
  always @(posedge clk) if (wstall) nstall++;

  int ex [2][12][64];
  int acc [2][12][512];
  logic [WRD_W*DATA_W-1:0] tile [2][512];
  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  function automatic int wt(int s, int a, int k);
    return int'(signed'(tile[s][a][16*k +: 16]));
  endfunction

  task automatic load_inputs(input int s);
    for (int v = 0; v < 12; v++) for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      for (int e = 0; e < 32; e++) begin
        ex[s][v][32*b + e] = $urandom_range(0, 1023) - 512;
        e_data[16*e +: 16] = 16'(ex[s][v][32*b + e]);
      end
      e_we = 1; e_set = 1'(s); e_lane = 4'(v % 4); e_idx = 3'((v / 4) * 2 + b);
    end
    @(negedge clk) e_we = 0;
  endtask

  task automatic run(input bit par, input int nv, input int nf, input int no, input int of,
                     input bit init, input int es, input int vs, input int ts, input int ta);
    int wpb;
    wpb = par ? 4 : 8;
    for (int a = 0; a < no * nf * wpb; a++) begin
      @(negedge clk);
      for (int k = 0; k < 64; k++) t_data[16*k +: 16] = 16'($urandom_range(0, 255) - 128);
      t_we = 1; t_sel = 1'(ts); t_addr = 9'(ta + a);
      tile[ts][ta + a] = t_data;
    end
    @(negedge clk) t_we = 0;
    // reference
    for (int oc = 0; oc < no; oc++) for (int fc = 0; fc < nf; fc++) for (int v = 0; v < nv; v++) begin
      int blk, ncol;
      blk = ta + (oc * nf + fc) * wpb;
      ncol = par ? 16 : 32;
      for (int col = 0; col < ncol; col++) begin
        int s, o;
        s = 0;
        for (int r = 0; r < 16; r++)
          s += ex[es][v][16 * fc + r] * (par ? wt(ts, blk + r / 4, 16 * (r % 4) + col)
                                             : wt(ts, blk + r / 2, 32 * (r % 2) + col));
        o = (of + oc) * ncol + col;
        if (init && fc == 0) acc[vs][v][o] = 0;
        acc[vs][v][o] = sat(acc[vs][v][o] + sat(s >>> 8));
      end
    end
    cmd = '0;
    cmd.eset = 1'(es); cmd.vset = 1'(vs); cmd.init = init; cmd.par = par; cmd.n_vert = 4'(nv);
    cmd.n_fchunk = 3'(nf); cmd.n_ochunk = 6'(no); cmd.o_first = 6'(of); cmd.tsel = 1'(ts); cmd.tile_addr = 10'(ta);
    start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic check(input int s, input int nv, input int ch0, input int nout);
    rd_set = 1'(s);
    for (int v = 0; v < nv; v++) for (int ch = ch0; ch < nout / 32; ch++) begin
      rd_v = 4'(v); rd_ch = 4'(ch); #1;
      for (int e = 0; e < 32; e++) begin
        checks++;
        if (int'(signed'(rd_data[16*e +: 16])) != acc[s][v][32*ch + e]) begin
          failures++;
          if (failures < 10) $display("FAIL set %0d v %0d o %0d got %0d exp %0d", s, v, 32*ch + e, signed'(rd_data[16*e +: 16]), acc[s][v][32*ch + e]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    load_inputs(0);
    load_inputs(1);
    // cooperative, full tile, 4 input chunks, 4 output chunks of 32 = 128 outputs
    run(0, 12, 4, 4, 0, 1, 0, 0, 0, 0);
    check(0, 12, 0, 128);
    // accumulate a second slice on top from the other edge-accumulator half
    run(0, 12, 2, 4, 0, 0, 1, 0, 1, 10);
    check(0, 12, 0, 128);
    // parallel, odd vertex count, 6 output chunks of 16 with offset 2 -> outputs 32..127
    run(1, 7, 3, 6, 2, 1, 1, 1, 0, 200);
    check(1, 7, 1, 128);
    // parallel, accumulate
    run(1, 7, 4, 6, 2, 0, 0, 1, 1, 300);
    check(1, 7, 1, 128);
    // cooperative, few vertices (weights are the bottleneck), later outputs
    run(0, 2, 4, 8, 8, 1, 0, 0, 0, 0);
    check(0, 2, 8, 512);
    // parallel, single vertex
    run(1, 1, 1, 2, 0, 1, 1, 1, 1, 0);
    check(1, 1, 0, 32);
    checks++;
    if (nstall == 0) begin failures++; $display("FAIL no weight stall"); end
    $display("INFO stalls=%0d", nstall);
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
