// tb_activate_pe: checks ReLU and the two-level LUT of activate_pe. The tables
// are filled from the identity function y = x (level 1) and y = 2x (level 2), so
// the interpolated result is known in closed form; the overflow region is
// checked both clamped and with a linear function, with the two signs set
// differently.
module tb_activate_pe;
  import grip_pkg::*;
  int checks = 0, failures = 0;
  logic lut;
  act_cfg_t cfg;
  elem_t x, y;

  activate_pe dut (.lut, .cfg, .x, .y);

  task automatic expect_near(int exp, int tol, string what);
    checks++;
    if (int'(y) > exp + tol || int'(y) < exp - tol) begin
      failures++;
      if (failures < 15) $display("FAIL %s x=%0d got %0d exp %0d", what, x, y, exp);
    end
  endtask

  initial begin
    // a = 1: level 1 spans [-2, 2] in steps of 1/8; b = 3: level 2 spans [-8, 8] in steps of 2
    cfg = '0;
    cfg.a = 2'd1;
    cfg.b = 2'd3;
    for (int i = 0; i <= 32; i++) cfg.l1[i] = elem_t'((-2 * 256) + i * 32);   // y = x   (Q8.8)
    for (int i = 0; i <= 8; i++)  cfg.l2[i] = elem_t'(2 * ((-8 * 256) + i * 512)); // y = 2x
    cfg.ps = 16'sd128;  cfg.pi = 16'sd256;     // above +8: 0.5x + 1
    cfg.pos_lin = 1'b1; cfg.neg_lin = 1'b0;    // below -8: clamp to l2[0] = -16

    lut = 1'b0;
    for (int t = 0; t < 100; t++) begin
      x = elem_t'($urandom); #1;
      expect_near((int'(x) < 0) ? 0 : int'(x), 0, "relu");
    end
    lut = 1'b1;
    for (int t = 0; t < 300; t++) begin
      x = elem_t'($urandom_range(0, 1024) - 512); #1;         // [-2, 2]
      expect_near(int'(x), 1, "level1");
    end
    for (int t = 0; t < 300; t++) begin
      int v;
      v = $urandom_range(513, 2047);                          // 2 < |x| < 8
      x = elem_t'((t % 2) ? v : -v); #1;
      expect_near(2 * int'(x), 2, "level2");
    end
    for (int t = 0; t < 100; t++) begin
      x = elem_t'($urandom_range(2049, 32767)); #1;
      expect_near(((int'(x) * 128) >>> 8) + 256, 1, "pos-linear");
      x = elem_t'(-$urandom_range(2049, 32767)); #1;
      expect_near(-16 * 256, 0, "neg-clamp");
    end
    cfg.pos_lin = 1'b0; cfg.neg_lin = 1'b1; cfg.ns = 16'sd512; cfg.ni = -16'sd256;
    x = 16'sd4000; #1; expect_near(16 * 256, 0, "pos-clamp");
    x = -16'sd4000; #1; expect_near(((-4000 * 512) >>> 8) - 256 < -32768 ? -32768 : ((-4000 * 512) >>> 8) - 256, 0, "neg-linear");
    x = -16'sd2100; #1; expect_near(((-2100 * 512) >>> 8) - 256, 0, "neg-linear2");
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
