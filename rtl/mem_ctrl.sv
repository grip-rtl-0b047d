// mem_ctrl: the memory controller, moving data on and off chip.
//
// One channel engine (mem_chan) per DRAM channel; channel i serves nodeflow
// source bank i and destination bank i, matching the paper's choice of one
// prefetch lane per DRAM channel with the features stored pre-partitioned in
// DRAM. Transfers are bulk LOAD/STORE commands scheduled by the host; units never
// request memory themselves, so they never stall on DRAM. The global weight
// buffer has one write port, granted to one channel at a time (lowest index
// first, held until that transfer ends). start/store/cmd go to the engine named
// by cmd.ch; done[i] pulses when engine i finishes.
module mem_ctrl
  import grip_pkg::*;
#(
  parameter int unsigned N_CH = N_PF
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              store,
  input  mem_cmd_t          cmd,
  output logic [N_CH-1:0]   done,
  // DRAM channels
  output logic [N_CH-1:0]   req_valid,
  input  logic [N_CH-1:0]   req_ready,
  output logic [N_CH-1:0]   req_we,
  output logic [31:0]       req_addr [N_CH],
  output line_t             req_wdata [N_CH],
  input  logic [N_CH-1:0]   rsp_valid,
  input  line_t             rsp_data [N_CH],
  // nodeflow source banks
  output logic [N_CH-1:0]   src_we,
  output logic [N_CH-1:0]   src_edge,
  output logic [7:0]        src_addr [N_CH],
  output logic [N_CH-1:0]   st_re,
  output logic [7:0]        st_addr [N_CH],
  input  line_t             st_data [N_CH],
  // nodeflow destination banks
  output logic [N_CH-1:0]   dst_we,
  output logic [5:0]        dst_addr [N_CH],
  output line_t             wdata [N_CH],
  // global weight buffer
  output logic              gwb_we,
  output logic [14:0]       gwb_addr,
  output line_t             gwb_data
);
  logic [N_CH-1:0] g_req, g_we;
  logic [14:0]     g_addr [N_CH];
  logic [N_CH-1:0] grant;
  logic            owned;
  logic [$clog2(N_CH)-1:0] owner;

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    mem_chan u_ch (
      .clk, .rst,
      .start(start && 32'(cmd.ch) == i), .store, .cmd, .done(done[i]),
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req_we(req_we[i]),
      .req_addr(req_addr[i]), .req_wdata(req_wdata[i]),
      .rsp_valid(rsp_valid[i]), .rsp_data(rsp_data[i]),
      .src_we(src_we[i]), .src_edge(src_edge[i]), .src_addr(src_addr[i]),
      .st_re(st_re[i]), .st_addr(st_addr[i]), .st_data(st_data[i]),
      .dst_we(dst_we[i]), .dst_addr(dst_addr[i]),
      .gwb_req(g_req[i]), .gwb_grant(grant[i]), .gwb_we(g_we[i]), .gwb_addr(g_addr[i]),
      .wdata(wdata[i])
    );
  end

  // global weight buffer write-port lock
  always_ff @(posedge clk) begin
    if (rst) owned <= 1'b0;
    else if (!owned) begin
      for (int i = N_CH - 1; i >= 0; i--)
        if (g_req[i]) begin owned <= 1'b1; owner <= ($clog2(N_CH))'(i); end
    end else if (!g_req[owner]) owned <= 1'b0;
  end
  always_comb begin
    grant = '0;
    if (owned) grant[owner] = 1'b1;
  end
  assign gwb_we   = owned && g_we[owner];
  assign gwb_addr = g_addr[owner];
  assign gwb_data = wdata[owner];
endmodule
