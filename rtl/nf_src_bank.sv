// nf_src_bank: one source bank of the nodeflow buffer, owned by one prefetch lane.
//
// Each bank holds the part of the nodeflow whose source vertices were assigned to
// its lane: an edge memory (4 KiB, 32-bit words: source-vertex list entries and
// edge records, see grip_pkg::vlist_t/erec_t) and a feature memory (16 KiB of
// 512-bit lines, 32 elements each). The paper gives 20 KiB per bank and four banks
// and shows edges and features side by side in a bank; the 16 + 4 KiB split is
// this design's choice.
//
// Ports: the memory controller loads lines (ld_*) and reads lines back for a store
// (st_*); the update unit writes result features (up_*); the prefetch lane reads
// one edge word and one feature line per cycle. All reads are synchronous and
// return data one cycle after the address, as an SRAM macro would. A line written
// in the same cycle as it is read returns the old contents.
module nf_src_bank
  import grip_pkg::*;
(
  input  logic        clk,
  // load from DRAM
  input  logic        ld_we,
  input  logic        ld_edge,          // 1: edge memory row, 0: feature line
  input  logic [7:0]  ld_addr,
  input  line_t       ld_data,
  // read for a store to DRAM
  input  logic        st_re,
  input  logic [7:0]  st_addr,
  output line_t       st_data,
  // result features from the update unit
  input  logic        up_we,
  input  logic [7:0]  up_addr,
  input  line_t       up_data,
  // prefetch lane
  input  logic        edge_re,
  input  logic [9:0]  edge_addr,        // 32-bit word address
  output logic [31:0] edge_data,
  input  logic        feat_re,
  input  logic [7:0]  feat_addr,
  output line_t       feat_data
);
  line_t feat_mem [FEAT_WORDS];
  line_t edge_mem [EDGE_ROWS];

  always_ff @(posedge clk) begin
    if (ld_we && !ld_edge) feat_mem[ld_addr] <= ld_data;
    if (ld_we &&  ld_edge) edge_mem[ld_addr[5:0]] <= ld_data;
    if (up_we)             feat_mem[up_addr] <= up_data;
    if (st_re)   st_data   <= feat_mem[st_addr];
    if (feat_re) feat_data <= feat_mem[feat_addr];
    if (edge_re) edge_data <= edge_mem[edge_addr[9:4]][32*edge_addr[3:0] +: 32];
  end
endmodule
