// dram_model: behavioural model of one DRAM channel, for testbenches only.
//
// Interface matches one channel of grip_top/mem_ctrl: a request is taken when
// req_valid && req_ready; writes store req_wdata at line address req_addr; reads
// return the line LAT cycles later on rsp_valid/rsp_data, in order, one per
// cycle. req_ready is random, ready with probability READY_PCT percent, to test
// back-pressure. Lines never written (by a request or by the poke task) read
// as init_line(SEED, addr), a fixed pattern that testbenches can recompute. Latency and the ready pattern are this
// model's choices; the paper gives no DRAM timing beyond the channel count.
module dram_model
  import grip_pkg::*;
#(
  parameter int unsigned LAT       = 10,
  parameter int unsigned READY_PCT = 70,
  parameter int unsigned SEED      = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  line_t       req_wdata,
  output logic        rsp_valid,
  output line_t       rsp_data
);
  line_t mem [int unsigned];
  line_t q_data [$];
  longint unsigned q_due [$];
  longint unsigned cyc = 0;
  int unsigned nreads = 0, nwrites = 0;

  function automatic line_t init_line(int unsigned seed, int unsigned a);
    line_t l;
    for (int k = 0; k < 32; k++) l[16*k +: 16] = 16'(((a * 37 + k * 11 + seed * 101) % 509) - 254);
    return l;
  endfunction

  function automatic line_t peek(int unsigned a);
    return mem.exists(a) ? mem[a] : init_line(SEED, a);
  endfunction

  // testbench preload
  task automatic poke(int unsigned a, line_t l);
    mem[a] = l;
  endtask

  initial begin
    req_ready = 1'b0;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (!rst) begin
      if (req_valid && req_ready) begin
        if (req_we) begin mem[req_addr] = req_wdata; nwrites++; end
        else begin q_data.push_back(peek(req_addr)); q_due.push_back(cyc + LAT); nreads++; end
      end
      if (q_due.size() != 0 && q_due[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q_data.pop_front();
        void'(q_due.pop_front());
      end
    end
    req_ready <= ($urandom_range(0, 99) < READY_PCT);
  end
endmodule
