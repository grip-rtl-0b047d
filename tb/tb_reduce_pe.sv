// tb_reduce_pe: checks sum, max and mean (coefficient-scaled sum) of reduce_pe,
// with and without the first-message flag, against an integer reference.
module tb_reduce_pe;
  import grip_pkg::*;
  int checks = 0, failures = 0;
  reduce_op_e op;
  logic first;
  elem_t coef;
  line_t acc, msg, res;

  reduce_pe dut (.op, .first, .coef, .acc, .msg, .res);

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      op = reduce_op_e'(t % 3);
      first = (t % 7 == 0);
      coef = elem_t'($urandom_range(0, 511));
      for (int i = 0; i < XBAR_W; i++) begin
        acc[16*i +: 16] = (t % 4 == 0) ? 16'($urandom) : 16'($urandom_range(0, 4095) - 2048);
        msg[16*i +: 16] = (t % 4 == 0) ? 16'($urandom) : 16'($urandom_range(0, 4095) - 2048);
      end
      #1;
      for (int i = 0; i < XBAR_W; i++) begin
        int a, m, e;
        a = int'(signed'(acc[16*i +: 16]));
        m = int'(signed'(msg[16*i +: 16]));
        if (t % 3 == 2) m = sat((int'(coef) * m) >>> 8);
        if (first) e = m;
        else if (t % 3 == 1) e = (m > a) ? m : a;
        else e = sat(a + m);
        checks++;
        if (int'(signed'(res[16*i +: 16])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL op=%0d first=%0d got %0d exp %0d", t % 3, first, signed'(res[16*i +: 16]), e);
        end
      end
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
