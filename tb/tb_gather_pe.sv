// tb_gather_pe: checks every gather operation of gather_pe on random beats
// against a reference written with plain integer arithmetic (Q8.8, saturating).
module tb_gather_pe;
  import grip_pkg::*;
  int checks = 0, failures = 0;
  gather_op_e op;
  elem_t gconst;
  line_t hu, hv, msg;

  gather_pe dut (.op, .gconst, .hu, .hv, .msg);

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  function automatic int ref_of(int o, int u, int v, int c);
    case (o)
      0: return u;
      1: return v;
      2: return sat(u + v);
      3: return sat((u * v) >>> 8);
      default: return sat((c * u) >>> 8);
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      op = gather_op_e'(t % 5);
      gconst = elem_t'($urandom);
      for (int i = 0; i < XBAR_W; i++) begin
        // mix small values and full-range values so saturation is exercised
        hu[16*i +: 16] = (t % 3 == 0) ? 16'($urandom) : 16'($urandom_range(0, 1023) - 512);
        hv[16*i +: 16] = (t % 3 == 0) ? 16'($urandom) : 16'($urandom_range(0, 1023) - 512);
      end
      #1;
      for (int i = 0; i < XBAR_W; i++) begin
        int e;
        e = ref_of(t % 5, int'(signed'(hu[16*i +: 16])), int'(signed'(hv[16*i +: 16])), int'(gconst));
        checks++;
        if (int'(signed'(msg[16*i +: 16])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL op=%0d lane=%0d got %0d exp %0d", t % 5, i, signed'(msg[16*i +: 16]), e);
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
