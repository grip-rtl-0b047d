// tb_nf_dst_bank: fills the destination-feature bank and checks synchronous
// reads against a reference copy, including a read of a line being rewritten
// (old contents expected).
module tb_nf_dst_bank;
  import grip_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ld_we = 0, rd_re = 0;
  logic [5:0] ld_addr = 0, rd_addr = 0;
  line_t ld_data = '0, rd_data;
  nf_dst_bank dut (.*);
  line_t ref_mem [64];

  initial begin
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) ref_mem[a][32*i +: 32] = $urandom;
      ld_we = 1; ld_addr = 6'(a); ld_data = ref_mem[a];
    end
    @(negedge clk) ld_we = 0;
    for (int t = 0; t < 300; t++) begin
      int a;
      line_t old;
      a = $urandom_range(0, 63);
      old = ref_mem[a];
      rd_re = 1; rd_addr = 6'(a);
      if (t % 3 == 0) begin
        ld_we = 1; ld_addr = 6'(a);
        for (int i = 0; i < 16; i++) ld_data[32*i +: 32] = $urandom;
        ref_mem[a] = ld_data;
      end
      @(negedge clk);
      ld_we = 0;
      checks++;
      if (rd_data != old) begin failures++; $display("FAIL line %0d", a); end
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
