// tb_control_unit: pushes random command streams (all opcodes, random channels,
// random barriers and CFG writes) into the control unit with random host
// pauses. Each unit is modelled as busy for a random number of cycles after it
// is issued a command. Checks: commands leave the queue in program order with
// the right target and payload, a unit is never issued while busy, a command
// after a barrier issues only when everything before the barrier has finished,
// CFG writes appear in order, units do run concurrently, and the status
// register ends with the right completed count, last opcode and no busy units.
module tb_control_unit;
  import grip_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, issue_store, cfg_we, barrier_wait;
  cmd_t cmd;
  logic [63:0] status;
  logic [N_UNITS-1:0] issue, unit_done = '0;
  cmd_t issue_cmd;

  control_unit dut (.*);

  cmd_t prog [$];
  int   left [N_UNITS];
  int   max_conc = 0, nbar = 0, ncfg = 0, issued_total = 0;

  function automatic int target(cmd_t c);
    mem_cmd_t m;
    m = mem_cmd_t'(c.arg);
    case (c.op)
      OP_LOAD, OP_STORE: return U_MEM0 + int'(m.ch);
      OP_FILL: return U_FILL;
      OP_EDGE: return U_EDGE;
      OP_VERTEX: return U_VERT;
      OP_UPDATE: return U_UPD;
      default: return -1;
    endcase
  endfunction

  // model of the units; pop_idx is the program index of the command at the head
  int pop_idx = 0;
  always @(posedge clk) if (!rst) begin
    int conc;
    unit_done <= '0;
    for (int u = 0; u < N_UNITS; u++)
      if (left[u] > 0) begin
        left[u]--;
        if (left[u] == 0) unit_done[u] <= 1'b1;
      end
    if (barrier_wait) nbar++;
    if (cfg_we) ncfg++;
    if (dut.pop) begin
      int t;
      t = target(prog[pop_idx]);
      checks++;
      if (t < 0) begin
        if (issue != '0) begin failures++; $display("FAIL issue for immediate command %0d", pop_idx); end
        if (cfg_we != (prog[pop_idx].op == OP_CFG)) begin failures++; $display("FAIL cfg_we at %0d", pop_idx); end
        if (prog[pop_idx].op == OP_BARRIER) begin
          // everything before the barrier has finished
          for (int u = 0; u < N_UNITS; u++)
            if (left[u] > 0 || unit_done[u]) begin failures++; $display("FAIL barrier %0d passed with unit %0d busy", pop_idx, u); end
        end
      end else begin
        if ($countones(issue) != 1 || !issue[t] || issue_cmd !== prog[pop_idx] || issue_store != (prog[pop_idx].op == OP_STORE)) begin
          failures++; $display("FAIL issue %0d: issue=%b", pop_idx, issue);
        end
        if (left[t] > 0 || unit_done[t]) begin failures++; $display("FAIL issue to busy unit %0d", t); end
        left[t] = $urandom_range(1, 25);
        issued_total++;
      end
      pop_idx++;
    end else if (issue != '0) begin
      failures++; $display("FAIL issue without pop");
    end
    conc = 0;
    for (int u = 0; u < N_UNITS; u++) if (left[u] > 0) conc++;
    if (conc > max_conc) max_conc = conc;
  end

  initial begin
    int n, nimm, ncfg_exp;
    cmd_t c;
    for (int u = 0; u < N_UNITS; u++) left[u] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    n = 400; nimm = 0; ncfg_exp = 0;
    for (int i = 0; i < n; i++) begin
      c = '0;
      for (int w = 0; w < 4; w++) c.arg[32*w +: 28] = 28'($urandom);
      case ($urandom_range(0, 19))
        0, 1, 2, 3: c.op = OP_LOAD;
        4: c.op = OP_STORE;
        5, 6: c.op = OP_FILL;
        7, 8, 9: c.op = OP_EDGE;
        10, 11, 12: c.op = OP_VERTEX;
        13, 14: c.op = OP_UPDATE;
        15: c.op = OP_BARRIER;
        16, 17: c.op = OP_CFG;
        default: c.op = OP_NOP;
      endcase
      if (c.op == OP_CFG) ncfg_exp++;
      if (target(c) < 0) nimm++;
      prog.push_back(c);
    end
    fork
      begin
        for (int i = 0; i < n; i++) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          cmd = prog[i]; cmd_valid = 1;
          @(posedge clk);
          while (!cmd_ready) @(posedge clk);
          #1 cmd_valid = 0;
        end
      end
    join
    repeat (200) @(negedge clk);
    checks += 5;
    if (issued_total != n - nimm) begin failures++; $display("FAIL issued %0d of %0d", issued_total, n - nimm); end
    if (status[31:0] != 32'(n)) begin failures++; $display("FAIL completed %0d", status[31:0]); end
    if (status[63:56] != 0) begin failures++; $display("FAIL busy %b", status[63:56]); end
    if (ncfg != ncfg_exp) begin failures++; $display("FAIL cfg %0d of %0d", ncfg, ncfg_exp); end
    if (max_conc < 3 || nbar == 0) begin failures++; $display("FAIL concurrency %0d barrier waits %0d", max_conc, nbar); end
    $display("INFO max concurrent=%0d barrier wait cycles=%0d", max_conc, nbar);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
