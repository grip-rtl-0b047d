// tb_vacc: random traffic on all ports of the vertex accumulator (two masked
// read-modify-write ports, update read and write ports) against a reference
// array; every line read combinationally is compared.
module tb_vacc;
  import grip_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_set, b_set, rd_set, wr_set, wr_we;
  logic [3:0] a_v, b_v, rd_v, wr_v, a_ch, b_ch, rd_ch, wr_ch;
  line_t a_rdata, b_rdata, rd_data, a_wdata, b_wdata, wr_data;
  logic [1:0] a_we, b_we;
  vacc dut (.*);
  line_t rm [2][12][16];

  function automatic line_t rnd();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    a_we = 0; b_we = 0; wr_we = 0;
    // initialise through the update write port
    for (int s = 0; s < 2; s++) for (int v = 0; v < 12; v++) for (int c = 0; c < 16; c++) begin
      @(negedge clk);
      wr_we = 1; wr_set = s[0]; wr_v = 4'(v); wr_ch = 4'(c); wr_data = rnd(); rm[s][v][c] = wr_data;
    end
    @(negedge clk) wr_we = 0;
    for (int t = 0; t < 2000; t++) begin
      a_set = 1'($urandom); a_v = 4'($urandom_range(0, 11)); a_ch = 4'($urandom);
      b_set = a_set; b_v = (a_v == 4'd11) ? 4'd0 : a_v + 4'd1; b_ch = a_ch;
      rd_set = 1'($urandom); rd_v = 4'($urandom_range(0, 11)); rd_ch = 4'($urandom);
      #1;
      checks += 3;
      if (a_rdata != rm[a_set][a_v][a_ch]) begin failures++; $display("FAIL a read"); end
      if (b_rdata != rm[b_set][b_v][b_ch]) begin failures++; $display("FAIL b read"); end
      if (rd_data != rm[rd_set][rd_v][rd_ch]) begin failures++; $display("FAIL rd read"); end
      a_we = 2'($urandom); b_we = 2'($urandom);
      a_wdata = rnd(); b_wdata = rnd();
      if (a_we[0]) rm[a_set][a_v][a_ch][255:0]   = a_wdata[255:0];
      if (a_we[1]) rm[a_set][a_v][a_ch][511:256] = a_wdata[511:256];
      if (b_we[0]) rm[b_set][b_v][b_ch][255:0]   = b_wdata[255:0];
      if (b_we[1]) rm[b_set][b_v][b_ch][511:256] = b_wdata[511:256];
      @(negedge clk);
      a_we = 0; b_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
