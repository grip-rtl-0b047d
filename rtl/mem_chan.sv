// mem_chan: one channel engine of the memory controller.
//
// Executes one bulk transfer at a time between its DRAM channel and the on-chip
// buffers of the same index: LOAD reads count lines from DRAM and writes them to
// the source bank's feature or edge memory, the destination bank, or (through
// gwb_*) the global weight buffer; STORE reads count feature lines of the source
// bank and writes them to DRAM. The paper only says that the host schedules all
// transfers statically as bulk moves; the engine structure is this design's.
//
// DRAM port: a request is taken when req_valid && req_ready; read data returns
// in order on rsp_valid (no back-pressure). LOAD keeps requests streaming, one
// per cycle when the channel accepts; STORE reads one line from the bank (one
// cycle) and then holds the write request until accepted. A LOAD to the global
// weight buffer first waits for gwb_grant, so only one channel writes that
// buffer at a time.
module mem_chan
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic        store,
  input  mem_cmd_t    cmd,
  output logic        done,
  // DRAM channel
  output logic        req_valid,
  input  logic        req_ready,
  output logic        req_we,
  output logic [31:0] req_addr,
  output line_t       req_wdata,
  input  logic        rsp_valid,
  input  line_t       rsp_data,
  // buffers
  output logic        src_we,
  output logic        src_edge,
  output logic [7:0]  src_addr,
  output logic        st_re,
  output logic [7:0]  st_addr,
  input  line_t       st_data,
  output logic        dst_we,
  output logic [5:0]  dst_addr,
  output logic        gwb_req,
  input  logic        gwb_grant,
  output logic        gwb_we,
  output logic [14:0] gwb_addr,
  output line_t       wdata
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SRD, S_SWAIT, S_SWR} state_e;
  state_e      state;
  mem_cmd_t    c;
  logic [15:0] req_left, rsp_left, bptr, sptr;
  logic [31:0] daddr;
  logic        go;

  assign gwb_req   = (state == S_LOAD) && c.target == T_GWB;
  assign go        = (c.target != T_GWB) || gwb_grant;
  assign req_valid = ((state == S_LOAD) && req_left != 0 && go) || (state == S_SWR);
  assign req_we    = (state == S_SWR);
  assign req_addr  = daddr;
  assign req_wdata = st_data;
  assign st_re     = (state == S_SRD);
  assign st_addr   = 8'(sptr);
  assign wdata     = rsp_data;

  always_comb begin
    src_we = 1'b0; dst_we = 1'b0; gwb_we = 1'b0;
    src_edge = (c.target == T_SRC_EDGE);
    src_addr = 8'(bptr);
    dst_addr = 6'(bptr);
    gwb_addr = 15'(bptr);
    if (state == S_LOAD && rsp_valid) begin
      unique case (c.target)
        T_SRC_FEAT, T_SRC_EDGE: src_we = 1'b1;
        T_DST_FEAT:             dst_we = 1'b1;
        T_GWB:                  gwb_we = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) state <= S_IDLE;
    else begin
      unique case (state)
        S_IDLE: if (start) begin
          c <= cmd; daddr <= cmd.dram_addr; req_left <= cmd.count; rsp_left <= cmd.count;
          bptr <= cmd.buf_addr; sptr <= cmd.buf_addr;
          if (cmd.count == 0) done <= 1'b1;
          else state <= store ? S_SRD : S_LOAD;
        end
        S_LOAD: begin
          if (req_valid && req_ready) begin
            daddr <= daddr + 32'd1; req_left <= req_left - 16'd1;
          end
          if (rsp_valid) begin
            bptr <= bptr + 16'd1; rsp_left <= rsp_left - 16'd1;
            if (rsp_left == 16'd1) begin state <= S_IDLE; done <= 1'b1; end
          end
        end
        S_SRD:   state <= S_SWAIT;
        S_SWAIT: state <= S_SWR;
        S_SWR: if (req_ready) begin
          daddr <= daddr + 32'd1; sptr <= sptr + 16'd1; req_left <= req_left - 16'd1;
          if (req_left == 16'd1) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_SRD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
