// tb_tile_buffer: fills both halves of the tile buffer with different data and
// checks reads of either half, including reading one half while the other is
// being written (the double-buffering use).
module tb_tile_buffer;
  import grip_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, wr_sel = 0, rd_en = 0, rd_sel = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  logic [1023:0] wr_data = '0, rd_data;
  tile_buffer dut (.*);
  logic [1023:0] ref_t [2][512];

  function automatic logic [1023:0] rnd();
    logic [1023:0] w;
    for (int i = 0; i < 32; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      ref_t[0][a] = rnd();
      wr_en = 1; wr_sel = 0; wr_addr = 9'(a); wr_data = ref_t[0][a];
    end
    @(negedge clk);
    // write half 1 while reading half 0
    for (int a = 0; a < 512; a++) begin
      int r;
      r = $urandom_range(0, 511);
      ref_t[1][a] = rnd();
      wr_en = 1; wr_sel = 1; wr_addr = 9'(a); wr_data = ref_t[1][a];
      rd_en = 1; rd_sel = 0; rd_addr = 9'(r);
      @(negedge clk);
      checks++;
      if (rd_data != ref_t[0][r]) begin failures++; $display("FAIL half0 word %0d", r); end
    end
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int r, s;
      r = $urandom_range(0, 511); s = $urandom_range(0, 1);
      rd_en = 1; rd_sel = s[0]; rd_addr = 9'(r);
      @(negedge clk);
      checks++;
      if (rd_data != ref_t[s][r]) begin failures++; $display("FAIL half%0d word %0d", s, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
