// tb_mat_array: loads random weights into both banks of mat_array in both
// layouts, streams random inputs (switching banks and modes between inputs,
// while the spare bank is being reloaded) and compares every output with a
// reference matrix-vector product. Also checks the six-cycle latency.
module tb_mat_array;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_en = 0, ld_bank = 0, ld_par = 0;
  logic [2:0] ld_idx = 0;
  logic [WRD_W*DATA_W-1:0] ld_word = '0;
  logic [1:0] busy;
  logic in_valid = 0, in_par = 0, in_bank = 0;
  logic [PE_ROWS*DATA_W-1:0] in_x0 = '0, in_x1 = '0;
  logic out_valid;
  line_t out_y;

  mat_array dut (.*);

  int W [2][16][32];            // reference weights
  typedef struct { int y[32]; int t; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int sat(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction

  task automatic load_bank(input bit b, input bit par);
    for (int j = 0; j < (par ? 4 : 8); j++) begin
      for (int k = 0; k < 64; k++) begin
        int v;
        v = $urandom_range(0, 1023) - 512;
        ld_word[16*k +: 16] = 16'(v);
        if (!par) W[b][2*j + k/32][k%32] = v;
        else begin W[b][4*j + k/16][k%16] = v; W[b][4*j + k/16][16 + k%16] = v; end
      end
      ld_en = 1; ld_bank = b; ld_par = par; ld_idx = 3'(j);
      @(posedge clk); #1;
    end
    ld_en = 0;
  endtask

  task automatic issue(input bit b, input bit par);
    exp_t e;
    int x0[16], x1[16];
    for (int r = 0; r < 16; r++) begin
      x0[r] = $urandom_range(0, 1023) - 512;
      x1[r] = $urandom_range(0, 1023) - 512;
      in_x0[16*r +: 16] = 16'(x0[r]);
      in_x1[16*r +: 16] = 16'(x1[r]);
    end
    for (int c = 0; c < 32; c++) begin
      longint s = 0;
      for (int r = 0; r < 16; r++) s += longint'((par && c >= 16) ? x1[r] : x0[r]) * W[b][r][c];
      e.y[c] = sat(s >>> 8);
    end
    // The input is in cycle cyc; six register stages make the result visible in
    // cycle cyc+6, and the checker samples it at the edge that closes that cycle.
    e.t = cyc + 6 + 1;
    q.push_back(e);
    in_valid = 1; in_bank = b; in_par = par;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  always @(posedge clk) if (!rst && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = q.pop_front();
      if (cyc != e.t) begin failures++; $display("FAIL latency: output at %0d expected %0d", cyc, e.t); end
      for (int c = 0; c < 32; c++) begin
        checks++;
        if (int'(signed'(out_y[16*c +: 16])) != e.y[c]) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d got %0d exp %0d", c, signed'(out_y[16*c +: 16]), e.y[c]);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1;
    rst = 0;
    load_bank(0, 0);
    for (int k = 0; k < 20; k++) begin
      bit b, p;
      b = k[0];
      p = (k % 4) >= 2;
      // issue a burst from the current bank, then reload the other one
      for (int i = 0; i < 5; i++) issue(b, p);
      while (busy[!b]) @(posedge clk);
      #1 load_bank(!b, (k + 1) % 4 >= 2);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
