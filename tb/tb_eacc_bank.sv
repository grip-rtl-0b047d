// tb_eacc_bank: checks the edge-accumulator bank: written bits (an unwritten
// entry reads as first / zero), the one-cycle clear of one half leaving the other
// intact, both write ports, and the 16-element vertex-unit read.
module tb_eacc_bank;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, clr_set = 0, rd_re = 0, rd_set = 0, wr_we = 0, wr_set = 0, up_we = 0, up_set = 0, va_set = 0;
  logic [2:0] rd_idx = 0, wr_idx = 0, up_idx = 0;
  line_t rd_data, wr_data = '0, up_data = '0;
  logic rd_first;
  logic [1:0] va_row = 0, va_chunk = 0;
  logic [255:0] va_data;
  eacc_bank dut (.*);

  line_t rm [2][6];
  bit    wr [2][6];

  task automatic check_all();
    for (int s = 0; s < 2; s++) for (int e = 0; e < 6; e++) begin
      rd_re = 1; rd_set = s[0]; rd_idx = 3'(e);
      va_set = s[0]; va_row = 2'(e / 2);
      for (int c = 0; c < 2; c++) begin
        va_chunk = 2'((e % 2) * 2 + c); #1;
        checks++;
        if (va_data != (wr[s][e] ? rm[s][e][256*c +: 256] : '0)) begin failures++; $display("FAIL va read set %0d entry %0d", s, e); end
      end
      @(negedge clk);
      checks++;
      if (rd_first != !wr[s][e] || (wr[s][e] && rd_data != rm[s][e])) begin
        failures++; $display("FAIL rd set %0d entry %0d first=%0d", s, e, rd_first);
      end
    end
    rd_re = 0;
  endtask

  initial begin
    @(negedge clk); rst = 0;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 40; t++) begin
      int s, e, u;
      line_t d;
      s = $urandom_range(0, 1); e = $urandom_range(0, 5); u = $urandom_range(0, 1);
      for (int i = 0; i < 16; i++) d[32*i +: 32] = $urandom;
      if (u) begin up_we = 1; up_set = s[0]; up_idx = 3'(e); up_data = d; end
      else   begin wr_we = 1; wr_set = s[0]; wr_idx = 3'(e); wr_data = d; end
      rm[s][e] = d; wr[s][e] = 1;
      @(negedge clk);
      up_we = 0; wr_we = 0;
      if (t == 20) begin
        check_all();
        clr = 1; clr_set = 1'b1;
        for (int k = 0; k < 6; k++) wr[1][k] = 0;
        @(negedge clk) clr = 0;
        check_all();
      end
    end
    check_all();
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
