// update_unit: the vertex-update phase.
//
// For one command (grip_pkg::upd_cmd_t) it reads every 32-element line of the
// vertex accumulator half vset for the n_vert vertices of the tile, applies the
// activate function on 32 parallel activate PEs (lane count is this design's
// choice) and writes the result to one of the three places the paper allows:
//   D_NF    the nodeflow buffer, as an updated feature (bank v mod 4, line
//           nf_base + (v div 4)*nf_stride + chunk), for the next layer;
//   D_EACC  the edge accumulator half dset (first two chunks of each vertex);
//   D_VACC  the vertex accumulator half dset, so the next program accumulates
//           onto this one's result.
// One line per cycle; the result is registered, so a line is written one cycle
// after it is read. The activation configuration registers (LUT tables, ranges,
// overflow handling) are written by OP_CFG commands through cfg_*.
module update_unit
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  upd_cmd_t    cmd,
  output logic        done,
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  elem_t       cfg_data,
  // vertex accumulator read
  output logic        rd_set,
  output logic [3:0]  rd_v,
  output logic [3:0]  rd_ch,
  input  line_t       rd_data,
  // destinations
  output logic [N_PF-1:0] nf_we,
  output logic [7:0]      nf_addr,
  output logic [M_RD-1:0] ea_we,
  output logic            ea_set,
  output logic [2:0]      ea_idx,
  output logic            va_we,
  output logic            va_set,
  output logic [3:0]      va_v,
  output logic [3:0]      va_ch,
  output line_t           wdata
);
  act_cfg_t cfg;
  upd_cmd_t c;
  logic     run, pv;
  logic [3:0] v, ch, pv_v, pv_ch;
  line_t    act;

  always_ff @(posedge clk) begin
    if (rst) cfg <= '0;
    else if (cfg_we) begin
      if (32'(cfg_addr) < CFG_L2)        cfg.l1[cfg_addr] <= cfg_data;
      else if (32'(cfg_addr) < CFG_A)    cfg.l2[cfg_addr - 8'(CFG_L2)] <= cfg_data;
      else case (32'(cfg_addr))
        CFG_A:   cfg.a <= cfg_data[1:0];
        CFG_B:   cfg.b <= cfg_data[1:0];
        CFG_OVF: begin cfg.pos_lin <= cfg_data[0]; cfg.neg_lin <= cfg_data[1]; end
        CFG_PS:  cfg.ps <= cfg_data;
        CFG_PI:  cfg.pi <= cfg_data;
        CFG_NS:  cfg.ns <= cfg_data;
        CFG_NI:  cfg.ni <= cfg_data;
        default: ;
      endcase
    end
  end

  assign rd_set = c.vset;
  assign rd_v   = v;
  assign rd_ch  = ch;

  for (genvar i = 0; i < XBAR_W; i++) begin : g_act
    activate_pe u_act (.lut(c.lut), .cfg, .x(line_el(rd_data, i)), .y(act[DATA_W*i +: DATA_W]));
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      run <= 1'b0; pv <= 1'b0;
    end else begin
      pv <= run;
      pv_v <= v; pv_ch <= ch;
      wdata <= act;
      if (!run && start) begin
        c <= cmd; run <= 1'b1; v <= '0; ch <= '0;
      end else if (run) begin
        if (5'(ch) + 5'd1 < c.n_chunk) ch <= ch + 4'd1;
        else begin
          ch <= '0;
          if (v + 4'd1 < c.n_vert) v <= v + 4'd1;
          else run <= 1'b0;
        end
      end
      if (pv && !run) done <= 1'b1;
    end
  end

  // write stage
  always_comb begin
    nf_we   = '0;
    ea_we   = '0;
    va_we   = 1'b0;
    nf_addr = c.nf_base + 8'(pv_v / 4'(N_PF)) * 8'(c.nf_stride) + 8'(pv_ch);
    ea_set  = c.dset;
    ea_idx  = 3'(pv_v / 4'(M_RD)) * 3'(BEATS) + 3'(pv_ch[0]);
    va_set  = c.dset;
    va_v    = pv_v;
    va_ch   = pv_ch;
    if (pv) begin
      unique case (c.dest)
        D_NF:    nf_we[2'(pv_v % 4'(N_PF))] = 1'b1;
        D_EACC:  if (pv_ch < 4'(BEATS)) ea_we[2'(pv_v % 4'(M_RD))] = 1'b1;
        D_VACC:  va_we = 1'b1;
        default: ;
      endcase
    end
  end
endmodule
