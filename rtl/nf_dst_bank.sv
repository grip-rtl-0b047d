// nf_dst_bank: destination-feature bank of the nodeflow buffer, owned by one
// reduce lane.
//
// The paper splits the nodeflow buffer into one SRAM per prefetch lane and one
// per reduce lane so that no lane shares a port. This bank holds the features
// h_v of the output vertices assigned to its reduce lane, read by stage R0 for
// gather functions that use them. Size (64 lines of 32 elements, 4 KiB) is this
// design's choice. The memory controller writes lines; R0 reads one line per
// cycle with one cycle of latency.
module nf_dst_bank
  import grip_pkg::*;
(
  input  logic       clk,
  input  logic       ld_we,
  input  logic [5:0] ld_addr,
  input  line_t      ld_data,
  input  logic       rd_re,
  input  logic [5:0] rd_addr,
  output line_t      rd_data
);
  line_t mem [DST_WORDS];
  always_ff @(posedge clk) begin
    if (ld_we) mem[ld_addr] <= ld_data;
    if (rd_re) rd_data <= mem[rd_addr];
  end
endmodule
