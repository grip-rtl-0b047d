// tb_update_unit: drives the update unit from a behavioural vertex accumulator
// (combinational read, as in vacc) and records every write it makes. Commands
// cover all three destinations (nodeflow bank, edge accumulator, vertex
// accumulator), 1..16 chunks per vertex and 1..12 vertices, with ReLU (checked
// against a direct ReLU model) and with the LUT function after a CFG sequence
// (checked against a separately tested activate_pe instance fed with the same
// configuration). Every expected destination line must be written exactly once,
// with the right data, and nothing else may be written.
module tb_update_unit;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done, cfg_we = 0;
  upd_cmd_t cmd;
  logic [7:0] cfg_addr = 0;
  elem_t cfg_data = 0;
  logic rd_set;
  logic [3:0] rd_v, rd_ch;
  line_t rd_data;
  logic [N_PF-1:0] nf_we;
  logic [7:0] nf_addr;
  logic [M_RD-1:0] ea_we;
  logic ea_set, va_we, va_set;
  logic [2:0] ea_idx;
  logic [3:0] va_v, va_ch;
  line_t wdata;

  update_unit dut (.*);

  line_t src [2][12][16];
  assign rd_data = src[rd_set][rd_v][rd_ch];

  // reference activation (LUT mode) with the same configuration
  act_cfg_t rcfg;
  elem_t rx, ry;
  activate_pe ref_pe (.lut(1'b1), .cfg(rcfg), .x(rx), .y(ry));

  // write log: key -> data, count
  line_t wr_data [string];
  int    wr_cnt [string];
  always @(posedge clk) if (!rst) begin
    for (int b = 0; b < 4; b++) if (nf_we[b]) begin
      string k; k = $sformatf("nf%0d_%0d", b, nf_addr);
      wr_data[k] = wdata; wr_cnt[k] = wr_cnt.exists(k) ? wr_cnt[k] + 1 : 1;
    end
    for (int b = 0; b < 4; b++) if (ea_we[b]) begin
      string k; k = $sformatf("ea%0d_%0d_%0d", b, ea_set, ea_idx);
      wr_data[k] = wdata; wr_cnt[k] = wr_cnt.exists(k) ? wr_cnt[k] + 1 : 1;
    end
    if (va_we) begin
      string k; k = $sformatf("va%0d_%0d_%0d", va_set, va_v, va_ch);
      wr_data[k] = wdata; wr_cnt[k] = wr_cnt.exists(k) ? wr_cnt[k] + 1 : 1;
    end
  end

  task automatic cfg_write(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 8'(a); cfg_data = elem_t'(d);
    if (a < CFG_L2) rcfg.l1[a] = elem_t'(d);
    else if (a < CFG_A) rcfg.l2[a - CFG_L2] = elem_t'(d);
    else if (a == CFG_A) rcfg.a = 2'(d);
    else if (a == CFG_B) rcfg.b = 2'(d);
    else if (a == CFG_OVF) begin rcfg.pos_lin = d[0]; rcfg.neg_lin = d[1]; end
    else if (a == CFG_PS) rcfg.ps = elem_t'(d);
    else if (a == CFG_PI) rcfg.pi = elem_t'(d);
    else if (a == CFG_NS) rcfg.ns = elem_t'(d);
    else if (a == CFG_NI) rcfg.ni = elem_t'(d);
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic run(input bit lut, input upd_dest_e dest, input int nv, input int nch,
                     input int vs, input int ds, input int base, input int stride);
    wr_data.delete(); wr_cnt.delete();
    cmd = '0;
    cmd.vset = 1'(vs); cmd.n_vert = 4'(nv); cmd.n_chunk = 5'(nch); cmd.lut = lut; cmd.dest = dest;
    cmd.dset = 1'(ds); cmd.nf_base = 8'(base); cmd.nf_stride = 5'(stride);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    begin
      int nexp;
      nexp = 0;
      for (int v = 0; v < nv; v++) for (int ch = 0; ch < nch; ch++) begin
        string k;
        line_t e;
        if (dest == D_EACC && ch >= 2) continue;
        for (int i = 0; i < 32; i++) begin
          elem_t x;
          x = line_el(src[vs][v][ch], i);
          if (lut) begin rx = x; #1; e[16*i +: 16] = ry; end
          else e[16*i +: 16] = (x < 0) ? '0 : x;
        end
        case (dest)
          D_NF:   k = $sformatf("nf%0d_%0d", v % 4, (base + (v / 4) * stride + ch) % 256);
          D_EACC: k = $sformatf("ea%0d_%0d_%0d", v % 4, ds, (v / 4) * 2 + ch);
          default: k = $sformatf("va%0d_%0d_%0d", ds, v, ch);
        endcase
        nexp++;
        checks++;
        if (!wr_cnt.exists(k) || wr_cnt[k] != 1 || wr_data[k] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %s count %0d", k, wr_cnt.exists(k) ? wr_cnt[k] : 0);
        end
      end
      checks++;
      if (wr_cnt.num() != nexp) begin failures++; $display("FAIL %0d lines written, %0d expected", wr_cnt.num(), nexp); end
    end
  endtask

  initial begin
    rcfg = '0;
    for (int s = 0; s < 2; s++) for (int v = 0; v < 12; v++) for (int c = 0; c < 16; c++)
      for (int i = 0; i < 32; i++) src[s][v][c][16*i +: 16] = 16'($urandom_range(0, 4095) - 2048);
    repeat (2) @(negedge clk);
    rst = 0;
    // sigmoid-like table
    for (int i = 0; i <= 32; i++) cfg_write(CFG_L1 + i, 128 + (i - 16) * 6);
    for (int i = 0; i <= 8; i++) cfg_write(CFG_L2 + i, 16 + i * 28);
    cfg_write(CFG_A, 1); cfg_write(CFG_B, 3); cfg_write(CFG_OVF, 1);
    cfg_write(CFG_PS, 4); cfg_write(CFG_PI, 240); cfg_write(CFG_NS, 0); cfg_write(CFG_NI, 0);
    run(0, D_NF, 12, 8, 0, 0, 16, 8);
    run(1, D_NF, 5, 16, 1, 0, 200, 16);
    run(0, D_EACC, 12, 2, 1, 1, 0, 0);
    run(1, D_EACC, 7, 4, 0, 0, 0, 0);
    run(0, D_VACC, 12, 16, 0, 1, 0, 0);
    run(1, D_VACC, 1, 1, 1, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
