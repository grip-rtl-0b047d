// mat_array: the transform PE array of the vertex unit.
//
// 16 x 32 weight-stationary multipliers, as in the paper: each PE holds a 16-bit
// weight in a double-buffered register and has one 16-bit multiplier. An input
// vector of 16 elements is broadcast along the rows (element r to every PE of
// row r) and each column's 16 products are summed by a reduction tree, giving 32
// outputs. The array is two 16 x 16 blocks (columns 0-15 and 16-31):
//   cooperative (par = 0): both blocks see the same input x0; y = x0 * W (32 outputs);
//   parallel    (par = 1): block 0 sees x0, block 1 sees x1, and both hold the
//                          same 16 x 16 weights (loaded by broadcast), so
//                          y[0:15] = x0 * W and y[16:31] = x1 * W.
// Latency is six cycles, the paper's split: three register stages distribute
// the input, one multiplies, two reduce (4 rows per adder tree in the first,
// the 4 partial sums in the second). One input per cycle, no stalls.
//
// Weight loading: ld_word carries 64 weights for bank ld_bank. In cooperative
// layout word j holds rows 2j and 2j+1 (32 columns each); in parallel layout
// word j holds rows 4j..4j+3 (16 columns each) and is written to both blocks.
// Every input carries the bank it uses, so the other bank can be reloaded while
// earlier inputs are still in flight; busy[b] says bank b is still needed by an
// input in the distribution stages. Outputs are Q8.8, saturated.
module mat_array
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // weight load
  input  logic        ld_en,
  input  logic        ld_bank,
  input  logic        ld_par,
  input  logic [2:0]  ld_idx,
  input  logic [WRD_W*DATA_W-1:0] ld_word,
  output logic [1:0]  busy,
  // compute
  input  logic        in_valid,
  input  logic        in_par,
  input  logic        in_bank,
  input  logic [PE_ROWS*DATA_W-1:0] in_x0,
  input  logic [PE_ROWS*DATA_W-1:0] in_x1,
  output logic        out_valid,
  output line_t       out_y
);
  typedef struct packed {
    logic v;
    logic par;
    logic bank;
    logic [PE_ROWS*DATA_W-1:0] x0;
    logic [PE_ROWS*DATA_W-1:0] x1;
  } dist_t;

  elem_t w [2][PE_ROWS][PE_COLS];
  dist_t d1, d2, d3;
  logic  m_v, r1_v;
  logic signed [31:0] prod [PE_ROWS][PE_COLS];
  logic signed [33:0] part [4][PE_COLS];

  // weight registers
  always_ff @(posedge clk) begin
    if (ld_en) begin
      for (int k = 0; k < WRD_W; k++) begin
        if (!ld_par) begin
          w[ld_bank][2*ld_idx + k/32][k%32] <= elem_t'(ld_word[DATA_W*k +: DATA_W]);
        end else if (ld_idx < 3'd4) begin
          w[ld_bank][4*ld_idx + k/16][k%16]      <= elem_t'(ld_word[DATA_W*k +: DATA_W]);
          w[ld_bank][4*ld_idx + k/16][16 + k%16] <= elem_t'(ld_word[DATA_W*k +: DATA_W]);
        end
      end
    end
  end

  assign busy[0] = (d1.v && !d1.bank) || (d2.v && !d2.bank) || (d3.v && !d3.bank);
  assign busy[1] = (d1.v &&  d1.bank) || (d2.v &&  d2.bank) || (d3.v &&  d3.bank);

  always_ff @(posedge clk) begin
    if (rst) begin
      d1.v <= 1'b0; d2.v <= 1'b0; d3.v <= 1'b0; m_v <= 1'b0; r1_v <= 1'b0; out_valid <= 1'b0;
    end else begin
      // distribution (3 cycles)
      d1.v <= in_valid; d1.par <= in_par; d1.bank <= in_bank; d1.x0 <= in_x0; d1.x1 <= in_x1;
      d2 <= d1;
      d3 <= d2;
      // multiply (1 cycle)
      m_v <= d3.v;
      for (int r = 0; r < PE_ROWS; r++)
        for (int col = 0; col < PE_COLS; col++) begin
          elem_t xin;
          xin  = (d3.par && col >= 16) ? elem_t'(d3.x1[DATA_W*r +: DATA_W]) : elem_t'(d3.x0[DATA_W*r +: DATA_W]);
          prod[r][col] <= xin * w[d3.bank][r][col];
        end
      // reduction (2 cycles)
      r1_v <= m_v;
      for (int g = 0; g < 4; g++)
        for (int col = 0; col < PE_COLS; col++)
          part[g][col] <= 34'(prod[4*g][col]) + 34'(prod[4*g+1][col]) + 34'(prod[4*g+2][col]) + 34'(prod[4*g+3][col]);
      out_valid <= r1_v;
      for (int col = 0; col < PE_COLS; col++) begin
        logic signed [35:0] s;
        s = 36'(part[0][col]) + 36'(part[1][col]) + 36'(part[2][col]) + 36'(part[3][col]);
        out_y[DATA_W*col +: DATA_W] <= sat16(48'(s >>> FRAC));
      end
    end
  end
endmodule
