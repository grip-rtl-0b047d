// vacc: the vertex accumulator, holding a_v for the vertices of one tile.
//
// Double buffered: the vertex unit accumulates into one half while the update
// unit reads the other. A half holds M_TILE = 12 vertices x O_MAX = 512 elements
// as 32-element lines (the paper names this buffer but gives no size; one tile at
// the widest evaluated layer is this design's choice).
//
// Ports (all reads combinational, writes on the clock edge):
//   a, b   read-modify-write ports of the vertex unit; the write mask selects
//          the 16-element halves of the line to update (parallel mode updates
//          a 16-element half of two different vertices in one cycle);
//   rd     read port of the update unit;
//   wr     write port of the update unit (results fed back as an accumulator).
module vacc
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        a_set, b_set, rd_set, wr_set,
  input  logic [3:0]  a_v, b_v, rd_v, wr_v,
  input  logic [3:0]  a_ch, b_ch, rd_ch, wr_ch,
  output line_t       a_rdata, b_rdata, rd_data,
  input  logic [1:0]  a_we, b_we,
  input  line_t       a_wdata, b_wdata,
  input  logic        wr_we,
  input  line_t       wr_data
);
  localparam int unsigned HALF = LINE_W / 2;
  line_t mem [2][M_TILE][VCHUNKS];

  assign a_rdata = mem[a_set][a_v][a_ch];
  assign b_rdata = mem[b_set][b_v][b_ch];
  assign rd_data = mem[rd_set][rd_v][rd_ch];

  always_ff @(posedge clk) begin
    if (wr_we) mem[wr_set][wr_v][wr_ch] <= wr_data;
    if (a_we[0]) mem[a_set][a_v][a_ch][0 +: HALF]    <= a_wdata[0 +: HALF];
    if (a_we[1]) mem[a_set][a_v][a_ch][HALF +: HALF] <= a_wdata[HALF +: HALF];
    if (b_we[0]) mem[b_set][b_v][b_ch][0 +: HALF]    <= b_wdata[0 +: HALF];
    if (b_we[1]) mem[b_set][b_v][b_ch][HALF +: HALF] <= b_wdata[HALF +: HALF];
  end
endmodule
