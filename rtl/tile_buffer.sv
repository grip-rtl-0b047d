// tile_buffer: two 64 KiB halves that cache weight tiles for the vertex unit.
//
// The weight sequencer fills one half from the global weight buffer while the
// other half feeds the multiplier array, so moving a slice of weights overlaps
// with computing on the previous one. Each half is 512 words of 64 weights (the
// paper gives 2 x 64 KiB). One write port, one synchronous read port, one cycle
// read latency; the half is selected by the top address bit.
module tile_buffer
  import grip_pkg::*;
#(
  parameter int unsigned WORDS = TILE_WORDS
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic                          wr_sel,
  input  logic [$clog2(WORDS)-1:0]      wr_addr,
  input  logic [WRD_W*DATA_W-1:0]       wr_data,
  input  logic                          rd_en,
  input  logic                          rd_sel,
  input  logic [$clog2(WORDS)-1:0]      rd_addr,
  output logic [WRD_W*DATA_W-1:0]       rd_data
);
  logic [WRD_W*DATA_W-1:0] mem [2*WORDS];
  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_sel, wr_addr}] <= wr_data;
    if (rd_en) rd_data <= mem[{rd_sel, rd_addr}];
  end
endmodule
