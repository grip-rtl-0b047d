// tb_grip_top: end-to-end test of the whole accelerator at its default sizes.
//
// The testbench plays host and DRAM. It builds one GCN-style layer for a tile of
// 12 output vertices: four nodeflow partitions (one per DRAM channel) with
// random source vertices, 64-element features and weighted edges, and a
// 64 x 96 weight slice. It then sends the command program
//   CFG; LOAD edges/features on all channels; LOAD weights; BARRIER;
//   FILL tile half 0; EDGE (gather source, weighted-sum reduce); BARRIER;
//   VERTEX cooperative (outputs 0..63) with FILL of tile half 1 alongside;
//   BARRIER; VERTEX parallel (outputs 64..95); BARRIER;
//   UPDATE (ReLU, into the nodeflow buffer); BARRIER; STORE on all channels;
//   BARRIER
// and compares what ends up in DRAM with a reference computed here from the
// same data, with the same Q8.8 rounding and saturation. It also checks the
// status register and counts every mechanism the events port reports (weight
// stall, reduce forwarding, crossbar conflict, barrier wait, parallel and
// cooperative array modes); one that never happens is a failure.
module tb_grip_top;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready;
  cmd_t cmd = '0;
  logic [63:0] status;
  logic [N_PF-1:0] dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [31:0] dram_req_addr [N_PF];
  line_t dram_req_wdata [N_PF], dram_rsp_data [N_PF];
  logic [5:0] events;

  grip_top dut (.*);

  localparam int E_BASE = 'h100, F_BASE = 'h400, W_BASE = 'h2000, O_BASE = 'h8000;
  line_t dimg [4][int unsigned];
  bit img_ready = 0;
  int poked = 0;
  for (genvar i = 0; i < 4; i++) begin : g_ch
    dram_model #(.LAT(8 + 2 * i), .READY_PCT(60 + 10 * i), .SEED(i)) dram (.clk, .rst,
      .req_valid(dram_req_valid[i]), .req_ready(dram_req_ready[i]), .req_we(dram_req_we[i]),
      .req_addr(dram_req_addr[i]), .req_wdata(dram_req_wdata[i]),
      .rsp_valid(dram_rsp_valid[i]), .rsp_data(dram_rsp_data[i]));
    initial begin
      wait (img_ready);
      foreach (dimg[i][a]) dram.poke(a, dimg[i][a]);
      poked++;
    end
  end

  int ev [6];
  always @(posedge clk) if (!rst) for (int k = 0; k < 6; k++) if (events[k]) ev[k]++;

  function automatic int s16(logic [15:0] x);
    return int'(elem_t'(x));
  endfunction
  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic send(input opcode_e op, input logic [123:0] arg);
    @(negedge clk);
    cmd.op = op; cmd.arg = arg; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask
  function automatic logic [123:0] mc(int ch, mem_target_e t, int da, int ba, int cnt);
    mem_cmd_t m;
    m = '0; m.ch = 2'(ch); m.target = t; m.dram_addr = 32'(da); m.buf_addr = 16'(ba); m.count = 16'(cnt);
    return m;
  endfunction

  int nsrc [4];
  int eacc_ref [12][64];
  int out_ref [12][96];
  logic [WRD_W*DATA_W-1:0] wword [96];

  initial begin
    int ncmd;
    for (int k = 0; k < 6; k++) ev[k] = 0;
    for (int v = 0; v < 12; v++) for (int e = 0; e < 64; e++) eacc_ref[v][e] = 0;
    // ---- nodeflow partitions
    for (int i = 0; i < 4; i++) begin
      logic [31:0] ew [1024];
      line_t ft [20];
      int ne;
      ne = 0;
      for (int w = 0; w < 1024; w++) ew[w] = '0;
      nsrc[i] = $urandom_range(4, 10);
      for (int s = 0; s < nsrc[i]; s++) begin
        vlist_t vl;
        int cnt;
        cnt = $urandom_range(0, 6);
        vl = '0; vl.feat_addr = 8'(2 * s); vl.first = 10'(256 + ne); vl.count = 8'(cnt);
        ew[s] = vl;
        for (int b = 0; b < 2; b++) for (int e = 0; e < 32; e++) ft[2 * s + b][16*e +: 16] = 16'($urandom_range(0, 511) - 256);
        for (int k = 0; k < cnt; k++) begin
          erec_t er;
          int d;
          d = $urandom_range(0, 11);
          er = '0; er.dst = 4'(d); er.coef = elem_t'($urandom_range(30, 120));
          ew[256 + ne] = er; ne++;
          for (int el = 0; el < 64; el++)
            eacc_ref[d][el] += sat((int'(er.coef) * s16(ft[2 * s + el / 32][16*(el % 32) +: 16])) >>> 8);
        end
      end
      for (int r = 0; r < 64; r++) begin
        line_t l;
        for (int w = 0; w < 16; w++) l[32*w +: 32] = ew[16*r + w];
        dimg[i][E_BASE + r] = l;
      end
      for (int a = 0; a < 2 * nsrc[i]; a++) dimg[i][F_BASE + a] = ft[a];
    end
    // ---- weights: words 0..63 cooperative blocks, 64..95 parallel blocks
    for (int w = 0; w < 96; w++) begin
      for (int k = 0; k < 64; k++) wword[w][16*k +: 16] = 16'($urandom_range(0, 63) - 32);
      dimg[3][W_BASE + 2 * w]     = wword[w][511:0];
      dimg[3][W_BASE + 2 * w + 1] = wword[w][1023:512];
    end
    // ---- reference layer output
    for (int v = 0; v < 12; v++) for (int o = 0; o < 96; o++) out_ref[v][o] = 0;
    for (int oc = 0; oc < 2; oc++) for (int fc = 0; fc < 4; fc++) for (int col = 0; col < 32; col++)
      for (int v = 0; v < 12; v++) begin
        int s;
        s = 0;
        for (int r = 0; r < 16; r++)
          s += eacc_ref[v][16 * fc + r] * s16(wword[(oc * 4 + fc) * 8 + r / 2][16 * (32 * (r % 2) + col) +: 16]);
        out_ref[v][32 * oc + col] = sat(out_ref[v][32 * oc + col] + sat(s >>> 8));
      end
    for (int oc = 0; oc < 2; oc++) for (int fc = 0; fc < 4; fc++) for (int col = 0; col < 16; col++)
      for (int v = 0; v < 12; v++) begin
        int s;
        s = 0;
        for (int r = 0; r < 16; r++)
          s += eacc_ref[v][16 * fc + r] * s16(wword[64 + (oc * 4 + fc) * 4 + r / 4][16 * (16 * (r % 4) + col) +: 16]);
        out_ref[v][64 + 16 * oc + col] = sat(out_ref[v][64 + 16 * oc + col] + sat(s >>> 8));
      end
    img_ready = 1;
    wait (poked == 4);
    repeat (3) @(negedge clk);
    rst = 0;
    // ---- program
    ncmd = 0;
    begin
      cfg_cmd_t cc;
      cc = '0; cc.addr = 8'(CFG_A); cc.data = 16'd1;
      send(OP_CFG, 124'(cc)); ncmd++;
    end
    for (int i = 0; i < 4; i++) begin send(OP_LOAD, mc(i, T_SRC_EDGE, E_BASE, 0, 64)); ncmd++; end
    for (int i = 0; i < 4; i++) begin send(OP_LOAD, mc(i, T_SRC_FEAT, F_BASE, 0, 2 * nsrc[i])); ncmd++; end
    send(OP_LOAD, mc(3, T_GWB, W_BASE, 0, 192)); ncmd++;
    send(OP_BARRIER, '0); ncmd++;
    begin
      fill_cmd_t f;
      f = '0; f.tsel = 0; f.gwb_addr = 0; f.tile_addr = 0; f.count = 64;
      send(OP_FILL, 124'(f)); ncmd++;
    end
    begin
      ea_cmd_t e;
      e = '0; e.eset = 0; e.clear = 1; e.use_r0 = 0; e.gop = G_SRC; e.rop = R_MEAN; e.vlist_base = 0;
      for (int i = 0; i < 4; i++) e.n_src[8*i +: 8] = 8'(nsrc[i]);
      e.feat_off = 0; e.beats = 2; e.dst_base = 0; e.dst_stride = 2;
      send(OP_EDGE, 124'(e)); ncmd++;
    end
    send(OP_BARRIER, '0); ncmd++;
    begin
      va_cmd_t va;
      fill_cmd_t f;
      va = '0; va.eset = 0; va.vset = 0; va.init = 1; va.par = 0; va.n_vert = 12; va.n_fchunk = 4;
      va.n_ochunk = 2; va.o_first = 0; va.tsel = 0; va.tile_addr = 0;
      send(OP_VERTEX, 124'(va)); ncmd++;
      f = '0; f.tsel = 1; f.gwb_addr = 64; f.tile_addr = 0; f.count = 32;
      send(OP_FILL, 124'(f)); ncmd++;
      send(OP_BARRIER, '0); ncmd++;
      va.par = 1; va.o_first = 4; va.tsel = 1;
      send(OP_VERTEX, 124'(va)); ncmd++;
      send(OP_BARRIER, '0); ncmd++;
    end
    begin
      upd_cmd_t u;
      u = '0; u.vset = 0; u.n_vert = 12; u.n_chunk = 3; u.lut = 0; u.dest = D_NF; u.nf_base = 128; u.nf_stride = 3;
      send(OP_UPDATE, 124'(u)); ncmd++;
    end
    send(OP_BARRIER, '0); ncmd++;
    for (int i = 0; i < 4; i++) begin send(OP_STORE, mc(i, T_SRC_FEAT, O_BASE, 128, 9)); ncmd++; end
    send(OP_BARRIER, '0); ncmd++;
    while (status[31:0] != 32'(ncmd) || status[63:56] != 0) @(negedge clk);
    $display("INFO program finished at %0t", $time);
    // ---- results in DRAM
    for (int v = 0; v < 12; v++) for (int ch = 0; ch < 3; ch++) begin
      line_t l;
      case (v % 4)
        0: l = g_ch[0].dram.peek(O_BASE + (v / 4) * 3 + ch);
        1: l = g_ch[1].dram.peek(O_BASE + (v / 4) * 3 + ch);
        2: l = g_ch[2].dram.peek(O_BASE + (v / 4) * 3 + ch);
        default: l = g_ch[3].dram.peek(O_BASE + (v / 4) * 3 + ch);
      endcase
      for (int e = 0; e < 32; e++) begin
        int exp_v;
        exp_v = out_ref[v][32 * ch + e] < 0 ? 0 : out_ref[v][32 * ch + e];
        checks++;
        if (s16(l[16*e +: 16]) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL v %0d out %0d got %0d exp %0d", v, 32 * ch + e, s16(l[16*e +: 16]), exp_v);
        end
      end
    end
    checks++;
    if (status[35:32] != 4'(OP_BARRIER)) begin failures++; $display("FAIL last opcode %0d", status[35:32]); end
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (ev[k] == 0) begin failures++; $display("FAIL event %0d never happened", k); end
    end
    $display("INFO weight stalls=%0d forwards=%0d xbar conflicts=%0d barrier waits=%0d parallel=%0d cooperative=%0d",
             ev[0], ev[1], ev[2], ev[3], ev[4], ev[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
