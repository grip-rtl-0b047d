// tb_reduce_lane: streams random beats into reduce_lane (back-to-back beats to
// the same vertex included, so forwarding is needed) for each gather/reduce
// combination, with and without stage R0, and compares the final edge
// accumulator contents with a reference reduction. Also checks that forwarding
// happened and that a beat is written in R4, four cycles after it enters R0.
module tb_reduce_lane;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic use_r0 = 0, eset = 0;
  gather_op_e gop = G_SRC;
  reduce_op_e rop = R_SUM;
  elem_t gconst = 16'sd128;
  logic [5:0] dst_base = 6'd4;
  logic [3:0] dst_stride = 4'd2;
  logic in_valid = 0, in_ready;
  edge_msg_t in_msg;
  logic dst_re, acc_re, acc_rd_set, acc_rd_first, acc_we, acc_wr_set, busy, bypass;
  logic [5:0] dst_addr;
  line_t dst_data, acc_rd_data, acc_wr_data;
  logic [2:0] acc_rd_idx, acc_wr_idx;
  logic clr = 0;
  logic va_set = 0;
  logic [1:0] va_row = 0, va_chunk = 0;
  logic [255:0] va_data;
  logic dld_we = 0;
  logic [5:0] dld_addr = 0;
  line_t dld_data = '0;

  reduce_lane dut (.*);
  eacc_bank acc (.clk, .rst, .clr, .clr_set(eset),
    .rd_re(acc_re), .rd_set(acc_rd_set), .rd_idx(acc_rd_idx), .rd_data(acc_rd_data), .rd_first(acc_rd_first),
    .wr_we(acc_we), .wr_set(acc_wr_set), .wr_idx(acc_wr_idx), .wr_data(acc_wr_data),
    .up_we(1'b0), .up_set(1'b0), .up_idx(3'd0), .up_data('0),
    .va_set, .va_row, .va_chunk, .va_data);
  nf_dst_bank dstb (.clk, .ld_we(dld_we), .ld_addr(dld_addr), .ld_data(dld_data),
    .rd_re(dst_re), .rd_addr(dst_addr), .rd_data(dst_data));

  int nbypass = 0, cyc = 0, first_in = -1, first_wr = -1;
  always @(posedge clk) begin
    cyc++;
    if (bypass) nbypass++;
    if (in_valid && first_in < 0) first_in = cyc;
    if (acc_we && first_wr < 0) first_wr = cyc;
  end

  int hv [3][64];               // destination features of rows 0..2 (64 elements)
  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic run(input gather_op_e g, input reduce_op_e r, input bit r0);
    int accv [3][64];
    bit  seen [3][2];
    int  nmsg;
    gop = g; rop = r; use_r0 = r0; eset = ~eset;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int row = 0; row < 3; row++) for (int b = 0; b < 2; b++) seen[row][b] = 0;
    nmsg = 60;
    for (int k = 0; k < nmsg; k++) begin
      int row, b, m;
      edge_msg_t msg;
      row = (k < 20) ? 1 : $urandom_range(0, 2);
      b = $urandom_range(0, 1);
      msg.dst = 4'(row * 4 + 2);    // lane 2 of 4
      msg.coef = elem_t'($urandom_range(16, 300));
      msg.beat = b[0];
      for (int i = 0; i < 32; i++) msg.data[16*i +: 16] = 16'($urandom_range(0, 2047) - 1024);
      for (int i = 0; i < 32; i++) begin
        int u, v, x;
        u = int'(signed'(msg.data[16*i +: 16]));
        v = hv[row][32*b + i];
        case (g)
          G_SRC: x = u;
          G_DST: x = v;
          G_ADD: x = sat(u + v);
          G_MUL: x = sat((u * v) >>> 8);
          default: x = sat((int'(gconst) * u) >>> 8);
        endcase
        if (r == R_MEAN) x = sat((int'(msg.coef) * x) >>> 8);
        if (!seen[row][b]) accv[row][32*b + i] = x;
        else if (r == R_MAX) accv[row][32*b + i] = (x > accv[row][32*b + i]) ? x : accv[row][32*b + i];
        else accv[row][32*b + i] = sat(accv[row][32*b + i] + x);
      end
      seen[row][b] = 1;
      in_valid = 1; in_msg = msg;
      @(negedge clk);
      in_valid = (k % 9 == 8) ? 0 : in_valid;
      if (k % 9 == 8) @(negedge clk);
    end
    in_valid = 0;
    while (busy) @(negedge clk);
    va_set = eset;
    for (int row = 0; row < 3; row++) for (int c = 0; c < 4; c++) begin
      va_row = 2'(row); va_chunk = 2'(c); #1;
      for (int i = 0; i < 16; i++) begin
        int e;
        e = seen[row][c / 2] ? accv[row][16*c + i] : 0;
        checks++;
        if (int'(signed'(va_data[16*i +: 16])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL g=%0d r=%0d row %0d el %0d got %0d exp %0d", g, r, row, 16*c + i, signed'(va_data[16*i +: 16]), e);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    // destination features for rows 0..2 at dst_base + row*dst_stride + beat
    for (int row = 0; row < 3; row++) for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      for (int i = 0; i < 32; i++) begin
        hv[row][32*b + i] = $urandom_range(0, 1023) - 512;
        dld_data[16*i +: 16] = 16'(hv[row][32*b + i]);
      end
      dld_we = 1; dld_addr = dst_base + 6'(row) * 6'(dst_stride) + 6'(b);
    end
    @(negedge clk) dld_we = 0;
    run(G_SRC, R_SUM, 0);
    run(G_SCALE, R_MAX, 0);
    run(G_SRC, R_MEAN, 0);
    run(G_ADD, R_SUM, 1);
    run(G_MUL, R_MAX, 1);
    run(G_DST, R_SUM, 1);
    checks++;
    if (nbypass == 0) begin failures++; $display("FAIL forwarding never used"); end
    checks++;
    if (first_wr - first_in != 4) begin failures++; $display("FAIL write %0d cycles after entry", first_wr - first_in); end
    $display("INFO bypass=%0d", nbypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
