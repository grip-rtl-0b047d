// global_weight_buffer: the 2 MiB on-chip store of layer weights.
//
// Weights are loaded once per GRIP program from DRAM and then read by the weight
// sequencer into the tile buffer. The paper gives the size (2 MiB) and a read
// bandwidth of 64 weights per cycle; a word here is therefore 64 x 16 bits and
// there are 16384 words. Writes arrive from the 512-bit DRAM channels, so a word
// is written one half at a time (wr_addr selects word and half). Reads are
// synchronous with one cycle of latency.
module global_weight_buffer
  import grip_pkg::*;
#(
  parameter int unsigned WORDS = GWB_WORDS
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(WORDS):0]       wr_addr,   // {word, half}
  input  line_t                        wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(WORDS)-1:0]     rd_addr,
  output logic [WRD_W*DATA_W-1:0]      rd_data
);
  line_t mem_lo [WORDS];
  line_t mem_hi [WORDS];
  always_ff @(posedge clk) begin
    if (wr_en && !wr_addr[0]) mem_lo[wr_addr[$clog2(WORDS):1]] <= wr_data;
    if (wr_en &&  wr_addr[0]) mem_hi[wr_addr[$clog2(WORDS):1]] <= wr_data;
    if (rd_en) rd_data <= {mem_hi[rd_addr], mem_lo[rd_addr]};
  end
endmodule
