// tb_prefetch_lane: builds a random partition (vertex list, edge records,
// features) in a nodeflow source bank, runs prefetch_lane over it with random
// back-pressure and checks the emitted beat sequence (destination, coefficient,
// beat index, feature slice) against the sequence computed from the partition.
// With no back-pressure it also checks the cycle count: 2 cycles per source
// vertex plus (1 + beats) cycles per edge.
module tb_prefetch_lane;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done;
  logic [9:0] vlist_base = 0;
  logic [7:0] n_src = 0, feat_off = 0;
  logic [1:0] beats = 2;
  logic edge_re, feat_re, out_valid, out_ready;
  logic [9:0] edge_addr;
  logic [31:0] edge_data;
  logic [7:0] feat_addr;
  line_t feat_data;
  edge_msg_t out;
  logic ld_we = 0, ld_edge = 0;
  logic [7:0] ld_addr = 0;
  line_t ld_data = '0;

  nf_src_bank bank (.clk, .ld_we, .ld_edge, .ld_addr, .ld_data, .st_re(1'b0), .st_addr(8'd0), .st_data(),
                    .up_we(1'b0), .up_addr(8'd0), .up_data('0),
                    .edge_re, .edge_addr, .edge_data, .feat_re, .feat_addr, .feat_data);
  prefetch_lane dut (.*);

  logic [31:0] ewords [1024];
  line_t       feats [256];
  edge_msg_t   expq [$];
  bit          random_ready = 1;

  always @(posedge clk) out_ready <= random_ready ? 1'($urandom) : 1'b1;

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL extra beat"); end
    else begin
      edge_msg_t e;
      e = expq.pop_front();
      if (out !== e) begin failures++; $display("FAIL beat dst %0d/%0d beat %0d/%0d", out.dst, e.dst, out.beat, e.beat); end
    end
  end

  task automatic build(input int nv, input int off, input int nb, output int cyc_exp);
    int ne = 0;
    cyc_exp = 0;
    expq.delete();
    for (int a = 0; a < 256; a++) for (int i = 0; i < 16; i++) feats[a][32*i +: 32] = $urandom;
    for (int v = 0; v < nv; v++) begin
      vlist_t vl;
      int cnt;
      cnt = (v % 4 == 3) ? 0 : $urandom_range(1, 4);
      vl.feat_addr = 8'(v * 4); vl.first = 10'(512 + ne); vl.count = 8'(cnt); vl.rsvd = '0;
      ewords[16 + v] = vl;
      cyc_exp += 2;
      for (int k = 0; k < cnt; k++) begin
        erec_t r;
        r.dst = 4'($urandom_range(0, 11)); r.rsvd = '0; r.coef = elem_t'($urandom);
        ewords[512 + ne] = r;
        ne++;
        cyc_exp += 1 + nb;
        for (int b = 0; b < nb; b++) begin
          edge_msg_t m;
          m.dst = r.dst; m.coef = r.coef; m.beat = b[0]; m.data = feats[v * 4 + off + b];
          expq.push_back(m);
        end
      end
    end
    // load the bank: 64 edge rows, 256 feature lines
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      ld_we = 1; ld_edge = 1; ld_addr = 8'(r);
      for (int w = 0; w < 16; w++) ld_data[32*w +: 32] = ewords[16*r + w];
    end
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      ld_we = 1; ld_edge = 0; ld_addr = 8'(a); ld_data = feats[a];
    end
    @(negedge clk) ld_we = 0;
  endtask

  task automatic run(input int nv, input int off, input int nb, input bit rr);
    int cyc_exp, t0, t1;
    build(nv, off, nb, cyc_exp);
    random_ready = rr;
    @(negedge clk);
    start = 1; vlist_base = 10'd16; n_src = 8'(nv); feat_off = 8'(off); beats = 2'(nb);
    @(negedge clk) start = 0;
    t0 = $time / 10;
    while (!done) @(negedge clk);
    t1 = $time / 10;
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d beats missing", expq.size()); end
    if (!rr) begin
      checks++;
      // + 2 cycles: last read to FIFO and done register
      if (t1 - t0 > cyc_exp + 3) begin failures++; $display("FAIL took %0d cycles, expected about %0d", t1 - t0, cyc_exp); end
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) ewords[i] = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    run(10, 1, 2, 0);
    run(12, 0, 2, 1);
    run(9, 2, 1, 1);
    run(0, 0, 2, 0);
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
