// tb_weight_seq: drives the weight sequencer with behavioural models of the
// global weight buffer and the tile buffer (one-cycle read latency each).
// Fill: random copies are checked word by word against the buffer model, and
// fill_done must follow the last write. Feed: random tiles in both array modes
// are streamed while a consumer model releases full banks after random delays
// and mat_busy is driven randomly; every loaded word must be the next expected
// word of the block sequence, go to the right bank with the right index, and
// never hit a bank that is full or busy.
module tb_weight_seq;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic fill_start = 0, fill_done, gwb_re, tb_we, tb_wsel, feed_start = 0, tb_re, tb_rsel;
  fill_cmd_t fill_cmd;
  va_cmd_t feed_cmd;
  logic [13:0] gwb_addr;
  logic [8:0] tb_waddr, tb_raddr;
  logic [WRD_W*DATA_W-1:0] gwb_data = '0, tb_wdata, tb_rdata = '0, ld_word;
  logic ld_en, ld_bank, ld_par, release_bank = 0;
  logic [2:0] ld_idx;
  logic [1:0] mat_busy = 0, wfull;

  weight_seq dut (.*);

  function automatic logic [WRD_W*DATA_W-1:0] gword(int a);
    logic [WRD_W*DATA_W-1:0] w;
    for (int k = 0; k < 32; k++) w[32*k +: 32] = 32'(a * 7919 + k * 104729 + 12345);
    return w;
  endfunction
  logic [WRD_W*DATA_W-1:0] tmem [2][512];
  always @(posedge clk) begin
    gwb_data <= gword(int'(gwb_addr));
    if (tb_we) tmem[tb_wsel][tb_waddr] <= tb_wdata;
    tb_rdata <= tmem[tb_rsel][tb_raddr];
  end

  // feed checking
  int exp_word, exp_idx, nwords, wpb;
  bit exp_bank, tsel_q;
  int base_q;
  always @(posedge clk) if (!rst) begin
    if (tb_re) begin
      checks++;
      if (wfull[dut.wb] || mat_busy[dut.wb]) begin failures++; $display("FAIL read for full/busy bank"); end
    end
    if (ld_en) begin
      checks++;
      if (ld_word !== tmem[tsel_q][base_q + exp_word] || ld_bank !== exp_bank || int'(ld_idx) != exp_idx) begin
        failures++;
        if (failures < 10) $display("FAIL load word %0d bank %0d idx %0d", exp_word, ld_bank, ld_idx);
      end
      exp_word++;
      if (exp_idx == wpb) begin exp_idx = 0; exp_bank = !exp_bank; end else exp_idx++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int s = 0; s < 2; s++) for (int a = 0; a < 512; a++) tmem[s][a] = '0;
    // fills
    for (int t = 0; t < 6; t++) begin
      int cnt, ga, ta, sel;
      cnt = $urandom_range(1, 200); ga = $urandom_range(0, 16000); ta = $urandom_range(0, 511 - cnt); sel = $urandom_range(0, 1);
      fill_cmd = '0; fill_cmd.tsel = 1'(sel); fill_cmd.gwb_addr = 14'(ga); fill_cmd.tile_addr = 10'(ta); fill_cmd.count = 10'(cnt);
      fill_start = 1;
      @(negedge clk) fill_start = 0;
      while (!fill_done) @(negedge clk);
      @(negedge clk);
      for (int i = 0; i < cnt; i++) begin
        checks++;
        if (tmem[sel][ta + i] !== gword(ga + i)) begin failures++; $display("FAIL fill word %0d", i); end
      end
    end
    // fill both halves fully with distinct data for the feed tests
    for (int s = 0; s < 2; s++) for (int a = 0; a < 512; a++) tmem[s][a] = gword(100000 * (s + 1) + a);
    for (int t = 0; t < 8; t++) begin
      int nb, hold;
      feed_cmd = '0;
      feed_cmd.par = 1'(t % 2); feed_cmd.tsel = 1'($urandom_range(0, 1));
      feed_cmd.n_fchunk = 3'($urandom_range(1, 4)); feed_cmd.n_ochunk = 6'($urandom_range(1, 8));
      feed_cmd.tile_addr = 10'($urandom_range(0, 100));
      wpb = feed_cmd.par ? 3 : 7;
      nb = int'(feed_cmd.n_fchunk) * int'(feed_cmd.n_ochunk);
      nwords = nb * (wpb + 1);
      exp_word = 0; exp_idx = 0; exp_bank = 0; tsel_q = feed_cmd.tsel; base_q = int'(feed_cmd.tile_addr);
      feed_start = 1;
      @(negedge clk) feed_start = 0;
      // consumer: when the current bank is full, hold it a while, then release
      for (int b = 0; b < nb; b++) begin
        int guard;
        guard = 0;
        while (!wfull[b % 2] && guard < 1000) begin
          mat_busy = 2'($urandom_range(0, 3));
          @(negedge clk); guard++;
        end
        hold = $urandom_range(0, 12);
        repeat (hold) begin mat_busy = 2'($urandom_range(0, 3)); @(negedge clk); end
        release_bank = 1; mat_busy[b % 2] = 1;
        @(negedge clk) release_bank = 0;
      end
      mat_busy = 0;
      repeat (5) @(negedge clk);
      checks++;
      if (exp_word != nwords) begin failures++; $display("FAIL feed %0d: %0d of %0d words", t, exp_word, nwords); end
    end
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
