// tb_global_weight_buffer: writes random words half by half at scattered
// addresses over the whole 2 MiB and reads them back as 64-weight words.
module tb_global_weight_buffer;
  import grip_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0;
  logic [14:0] wr_addr = 0;
  logic [13:0] rd_addr = 0;
  line_t wr_data = '0;
  logic [1023:0] rd_data;
  global_weight_buffer dut (.*);
  logic [1023:0] ref_w [int];
  int addrs [$];

  initial begin
    for (int t = 0; t < 200; t++) begin
      int a;
      logic [1023:0] w;
      a = (t == 0) ? 0 : (t == 1) ? 16383 : $urandom_range(0, 16383);
      if (ref_w.exists(a)) continue;
      for (int i = 0; i < 32; i++) w[32*i +: 32] = $urandom;
      ref_w[a] = w;
      addrs.push_back(a);
      @(negedge clk); wr_en = 1; wr_addr = {14'(a), 1'b0}; wr_data = w[511:0];
      @(negedge clk); wr_en = 1; wr_addr = {14'(a), 1'b1}; wr_data = w[1023:512];
    end
    @(negedge clk) wr_en = 0;
    foreach (addrs[k]) begin
      rd_en = 1; rd_addr = 14'(addrs[k]);
      @(negedge clk);
      checks++;
      if (rd_data != ref_w[addrs[k]]) begin failures++; $display("FAIL word %0d", addrs[k]); end
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
