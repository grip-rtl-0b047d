// tb_nf_src_bank: writes feature lines (load and update ports) and edge rows,
// then checks the one-cycle synchronous reads of all three read ports against a
// reference copy, including the 32-bit word selection of the edge port.
module tb_nf_src_bank;
  import grip_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ld_we = 0, ld_edge = 0, st_re = 0, up_we = 0, edge_re = 0, feat_re = 0;
  logic [7:0] ld_addr = 0, st_addr = 0, up_addr = 0, feat_addr = 0;
  logic [9:0] edge_addr = 0;
  line_t ld_data = '0, up_data = '0, st_data, feat_data;
  logic [31:0] edge_data;
  nf_src_bank dut (.*);

  line_t fref [256];
  line_t eref [64];

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      fref[a] = rnd_line();
      if (a % 5 == 0) begin up_we = 1; up_addr = 8'(a); up_data = fref[a]; ld_we = 0; end
      else begin ld_we = 1; ld_edge = 0; ld_addr = 8'(a); ld_data = fref[a]; up_we = 0; end
    end
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      up_we = 0;
      eref[a] = rnd_line();
      ld_we = 1; ld_edge = 1; ld_addr = 8'(a); ld_data = eref[a];
    end
    @(negedge clk) ld_we = 0;
    for (int t = 0; t < 500; t++) begin
      int fa, sa, ea;
      fa = $urandom_range(0, 255); sa = $urandom_range(0, 255); ea = $urandom_range(0, 1023);
      feat_re = 1; feat_addr = 8'(fa); st_re = 1; st_addr = 8'(sa); edge_re = 1; edge_addr = 10'(ea);
      @(negedge clk);
      checks += 3;
      if (feat_data != fref[fa]) begin failures++; $display("FAIL feat %0d", fa); end
      if (st_data != fref[sa]) begin failures++; $display("FAIL store read %0d", sa); end
      if (edge_data != eref[ea / 16][32*(ea % 16) +: 32]) begin failures++; $display("FAIL edge word %0d", ea); end
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
