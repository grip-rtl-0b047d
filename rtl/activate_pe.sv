// activate_pe: the activate function of the update unit for one element.
//
// Two operations, as in the paper: ReLU, or a two-level lookup table with linear
// interpolation. For the table the Q8.8 input is converted to Q4.12 (16 bits, 4
// integer bits, as the paper states). Level 1 has 33 entries evenly spread over
// [-2^a, 2^a]; level 2 has 9 entries over [-2^b, 2^b]. Level 1 is tried first,
// then level 2; inside a level the two nearest entries are interpolated. Beyond
// +-2^b the output is either clamped to the end entry of level 2 or given by a
// linear function slope*x + offset, chosen separately for positive and negative
// inputs. Table entries, slopes and offsets are Q8.8; the output is Q8.8.
// a and b are limited to 0..3 so both ranges fit the Q4.12 format (this design's
// choice; the paper only says they are user configurable). Combinational.
module activate_pe
  import grip_pkg::*;
(
  input  logic     lut,      // 0: ReLU, 1: LUT
  input  act_cfg_t cfg,
  input  elem_t    x,
  output elem_t    y
);
  function automatic elem_t interp(input elem_t lo, input elem_t hi,
                                   input logic [19:0] frac, input int unsigned sh);
    logic signed [39:0] d;
    d = (40'(hi) - 40'(lo)) * $signed({1'b0, frac});
    return sat16(48'(lo) + 48'(d >>> sh));
  endfunction

  logic signed [19:0] x12;     // Q4.12, saturated to 16-bit range
  logic signed [19:0] lim_a, lim_b, pos1, pos2;
  logic signed [19:0] x8;      // Q8.8 widened
  int unsigned sh1, sh2, sa, sb;
  logic signed [19:0] m1, m2, r1, r2;
  logic [5:0]  i1;
  logic [3:0]  i2;

  always_comb begin
    x8  = 20'(x);
    x12 = (x8 > 20'sd2047) ? 20'sd32767 : (x8 < -20'sd2048) ? -20'sd32768 : (x8 <<< 4);
    sa = 32'(cfg.a);
    sb = 32'(cfg.b);
    lim_a = 20'(32'sd1 <<< (12 + sa));
    lim_b = 20'(32'sd1 <<< (12 + sb));
    r1 = 20'(32'sd1 <<< (8 + sa));     // level-1 range in Q8.8
    r2 = 20'(32'sd1 <<< (8 + sb));
    pos1 = x12 + lim_a;
    pos2 = x12 + lim_b;
    sh1 = 32'(cfg.a) + 8;          // level-1 step 2^(a+1)/32 = 2^(a+8) Q4.12 units
    sh2 = 32'(cfg.b) + 10;         // level-2 step 2^(b+1)/8  = 2^(b+10) Q4.12 units
    m1 = 20'((32'sd1 <<< sh1) - 1);
    m2 = 20'((32'sd1 <<< sh2) - 1);
    i1 = 6'(pos1 >>> sh1);
    i2 = 4'(pos2 >>> sh2);
    y = x;
    if (!lut) begin
      y = (x < 0) ? '0 : x;
    end else if (x8 >= -r1 && x8 <= r1) begin
      if (i1 >= 6'd32) y = cfg.l1[32];
      else y = interp(cfg.l1[i1], cfg.l1[i1 + 6'd1], pos1 & m1, sh1);
    end else if (x8 >= -r2 && x8 <= r2) begin
      if (i2 >= 4'd8) y = cfg.l2[8];
      else y = interp(cfg.l2[i2], cfg.l2[i2 + 4'd1], pos2 & m2, sh2);
    end else if (x > 0) begin
      y = cfg.pos_lin ? qadd(qmul(cfg.ps, x), cfg.pi) : cfg.l2[8];
    end else begin
      y = cfg.neg_lin ? qadd(qmul(cfg.ns, x), cfg.ni) : cfg.l2[0];
    end
  end
endmodule
