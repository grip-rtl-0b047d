// eacc_bank: one bank of the edge accumulator, owned by one reduce lane.
//
// The edge accumulator holds a small tile of partially reduced messages e_v:
// f = 64 elements for each of the m = 12 output vertices of the current vertex
// tile (1.5 KiB per half, the size the paper quotes). With four reduce lanes a
// bank holds the 3 vertices assigned to its lane, as 3 x 2 lines of 32 elements.
// It is double buffered: while the edge unit reduces into one half, the vertex
// unit reads the other.
//
// Each entry has a written bit. clr clears the bits of one half at the start of
// a tile; an entry never written since reads back as "first" to the reduce lane
// (so its first message is stored as is) and as zero to the vertex unit. The
// written bits are this design's way of clearing a tile in one cycle.
//
// Ports: reduce-lane read (synchronous, 1 cycle) and write; update-unit write;
// vertex-unit read of 16 elements, combinational.
module eacc_bank
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        clr,
  input  logic        clr_set,
  // reduce lane
  input  logic        rd_re,
  input  logic        rd_set,
  input  logic [2:0]  rd_idx,        // {row, beat}
  output line_t       rd_data,
  output logic        rd_first,
  input  logic        wr_we,
  input  logic        wr_set,
  input  logic [2:0]  wr_idx,
  input  line_t       wr_data,
  // update unit
  input  logic        up_we,
  input  logic        up_set,
  input  logic [2:0]  up_idx,
  input  line_t       up_data,
  // vertex unit
  input  logic        va_set,
  input  logic [1:0]  va_row,
  input  logic [1:0]  va_chunk,      // 16-element chunk of the 64-element row
  output logic [16*DATA_W-1:0] va_data
);
  localparam int unsigned ENT = EROWS * BEATS;
  line_t          mem [2][ENT];
  logic [ENT-1:0] written [2];

  always_ff @(posedge clk) begin
    if (rd_re) begin
      rd_data  <= mem[rd_set][rd_idx];
      rd_first <= !written[rd_set][rd_idx];
    end
    if (wr_we) mem[wr_set][wr_idx] <= wr_data;
    if (up_we) mem[up_set][up_idx] <= up_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      written[0] <= '0;
      written[1] <= '0;
    end else begin
      if (clr) written[clr_set] <= '0;
      if (wr_we) written[wr_set][wr_idx] <= 1'b1;
      if (up_we) written[up_set][up_idx] <= 1'b1;
    end
  end

  logic [2:0] va_idx;
  line_t      va_line;
  always_comb begin
    va_idx  = 3'(va_row) * 3'(BEATS) + 3'(va_chunk[1]);
    va_line = mem[va_set][va_idx];
    va_data = written[va_set][va_idx] ? va_line[16*DATA_W*va_chunk[0] +: 16*DATA_W] : '0;
  end
endmodule
