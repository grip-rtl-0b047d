// weight_seq: the weight sequencer, which keeps the tile buffer and the
// multiplier array supplied with weights in the order the vertex unit uses them.
//
// Fill (OP_FILL, fill_start/fill_cmd): copies count words (64 weights each) from
// the global weight buffer into one half of the tile buffer, one word per cycle.
// The host fills the spare half while the vertex unit works from the other, so
// moving the next weight slice overlaps computing the current one; this is the
// paper's pipelining of weight transfers with a partition column.
//
// Feed (started together with the vertex unit by OP_VERTEX): streams the
// n_ochunk x n_fchunk weight blocks of the tile, in the vertex unit's loop order,
// from the tile buffer into the array's two weight banks alternately. A block is
// 8 words (16 x 32, cooperative layout) or 4 words (16 x 16, parallel layout),
// stored consecutively from tile_addr; this layout is this design's. A bank is
// written only when it is neither full (not yet consumed) nor busy (still read by
// inputs in flight); the vertex unit's release pulse frees the bank it used.
// One word per cycle, tile-buffer read latency one cycle.
module weight_seq
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // fill
  input  logic        fill_start,
  input  fill_cmd_t   fill_cmd,
  output logic        fill_done,
  output logic        gwb_re,
  output logic [13:0] gwb_addr,
  input  logic [WRD_W*DATA_W-1:0] gwb_data,
  output logic        tb_we,
  output logic        tb_wsel,
  output logic [8:0]  tb_waddr,
  output logic [WRD_W*DATA_W-1:0] tb_wdata,
  // feed
  input  logic        feed_start,
  input  va_cmd_t     feed_cmd,
  output logic        tb_re,
  output logic        tb_rsel,
  output logic [8:0]  tb_raddr,
  input  logic [WRD_W*DATA_W-1:0] tb_rdata,
  output logic        ld_en,
  output logic        ld_bank,
  output logic        ld_par,
  output logic [2:0]  ld_idx,
  output logic [WRD_W*DATA_W-1:0] ld_word,
  input  logic [1:0]  mat_busy,
  input  logic        release_bank,
  output logic [1:0]  wfull
);
  // ------------------------------------------------------------------ fill
  logic        f_run, f_pend;
  logic [13:0] f_src;
  logic [8:0]  f_dst, f_pdst;
  logic [9:0]  f_left;
  logic        f_sel;

  assign gwb_re   = f_run && f_left != 0;
  assign gwb_addr = f_src;
  assign tb_we    = f_pend;
  assign tb_wsel  = f_sel;
  assign tb_waddr = f_pdst;
  assign tb_wdata = gwb_data;

  always_ff @(posedge clk) begin
    fill_done <= 1'b0;
    if (rst) begin
      f_run <= 1'b0; f_pend <= 1'b0;
    end else begin
      f_pend <= gwb_re;
      f_pdst <= f_dst;
      if (!f_run && fill_start) begin
        f_run <= 1'b1; f_src <= fill_cmd.gwb_addr; f_dst <= 9'(fill_cmd.tile_addr);
        f_left <= fill_cmd.count; f_sel <= fill_cmd.tsel;
      end else if (f_run) begin
        if (f_left != 0) begin
          f_src <= f_src + 14'd1; f_dst <= f_dst + 9'd1; f_left <= f_left - 10'd1;
        end else if (!f_pend) begin
          f_run <= 1'b0; fill_done <= 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------------ feed
  logic        r_run, r_pend, wb, rb;
  logic [2:0]  widx, pidx, wpb;
  logic [9:0]  blocks_left;
  logic [8:0]  raddr;
  logic        p_last, par_q;
  logic        can_issue;

  assign wpb       = par_q ? 3'd3 : 3'd7;        // last word index of a block
  assign can_issue = r_run && blocks_left != 0 && !wfull[wb] && !mat_busy[wb];
  assign tb_re     = can_issue;
  assign tb_raddr  = raddr;
  assign ld_en     = r_pend;
  assign ld_idx    = pidx;
  assign ld_word   = tb_rdata;
  assign ld_par    = par_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      r_run <= 1'b0; r_pend <= 1'b0; wfull <= '0;
    end else begin
      r_pend <= can_issue;
      pidx   <= widx;
      p_last <= (widx == wpb);
      ld_bank <= wb;
      if (release_bank) wfull[rb] <= 1'b0;
      if (release_bank) rb <= ~rb;
      if (r_pend && p_last) wfull[ld_bank] <= 1'b1;
      if (feed_start && !r_run) begin
        r_run <= 1'b1; wb <= 1'b0; rb <= 1'b0; widx <= '0; wfull <= '0;
        par_q <= feed_cmd.par; raddr <= 9'(feed_cmd.tile_addr); tb_rsel <= feed_cmd.tsel;
        blocks_left <= 10'(feed_cmd.n_ochunk) * 10'(feed_cmd.n_fchunk);
      end else if (can_issue) begin
        raddr <= raddr + 9'd1;
        if (widx == wpb) begin
          widx <= '0; wb <= ~wb; blocks_left <= blocks_left - 10'd1;
        end else widx <= widx + 3'd1;
      end else if (r_run && blocks_left == 0 && !r_pend) begin
        r_run <= 1'b0;
      end
    end
  end
endmodule
