// tb_xbar: drives random beats from all four prefetch-side inputs of xbar
// with random output back-pressure, and checks that every beat arrives exactly
// once, at the output dst mod 4, in order per (input, output) pair, and that
// arbitration conflicts occur and are reported.
module tb_xbar;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] in_valid, in_ready, out_valid, out_ready;
  edge_msg_t  in_msg [4];
  edge_msg_t  out_msg [4];
  logic       conflict;
  xbar dut (.*);

  int sent [4], got [4];
  int expq [4][4][$];           // [input][output] expected sequence numbers
  int nconf = 0;
  localparam int PER_IN = 200;

  // producers: data carries {input, sequence}
  for (genvar i = 0; i < 4; i++) begin : g_src
    always @(posedge clk) begin
      if (rst) begin
        in_valid[i] <= 1'b0; sent[i] = 0;
      end else begin
        if (in_valid[i] && in_ready[i]) in_valid[i] <= 1'b0;
        if ((!in_valid[i] || in_ready[i]) && sent[i] < PER_IN && $urandom_range(0, 3) != 0) begin
          edge_msg_t m;
          m = '0;
          m.dst = 4'($urandom_range(0, 11));
          m.data[15:0] = 16'(i);
          m.data[47:16] = sent[i];
          expq[i][m.dst % 4].push_back(sent[i]);
          sent[i]++;
          in_msg[i] <= m;
          in_valid[i] <= 1'b1;
        end
      end
    end
  end

  always @(posedge clk) begin
    out_ready <= 4'($urandom);
    if (!rst && conflict) nconf++;
    if (!rst) for (int o = 0; o < 4; o++) if (out_valid[o] && out_ready[o]) begin
      int src, sq;
      src = int'(out_msg[o].data[15:0]);
      sq  = int'(out_msg[o].data[47:16]);
      checks++;
      if (out_msg[o].dst % 4 != o) begin failures++; $display("FAIL beat for lane %0d at output %0d", out_msg[o].dst % 4, o); end
      else if (expq[src][o].size() == 0 || expq[src][o][0] != sq) begin
        failures++; $display("FAIL out %0d: unexpected beat %0d from input %0d", o, sq, src);
      end else begin
        void'(expq[src][o].pop_front());
        got[src]++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3000) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (got[i] != PER_IN) begin failures++; $display("FAIL input %0d delivered %0d of %0d", i, got[i], PER_IN); end
    end
    checks++;
    if (nconf == 0) begin failures++; $display("FAIL no arbitration conflict seen"); end
    $display("INFO conflicts=%0d", nconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
