// vertex_unit: the vertex-accumulate phase, a_v += W^T e_v for one vertex tile.
//
// For one command (grip_pkg::va_cmd_t) the unit walks, in this order, the output
// chunks of the layer slice, the 16-element input chunks of the edge-accumulator
// tile, and the vertices of the tile. The weight block for one (output, input)
// chunk pair is loaded into the multiplier array once and then used by every
// vertex of the tile, which is the weight reuse that the paper calls
// vertex-tiling. Cooperative mode feeds one vertex per cycle through the whole
// 16x32 array (32 outputs); parallel mode feeds two vertices per cycle, each
// through one 16x16 block (16 outputs each).
//
// Weight blocks come from the weight sequencer into the array's spare weight
// bank; wfull[b] says bank b holds the next block. The unit issues from bank cur
// only when it is full, and releases it (release pulse) once the last vertex of
// the block has been issued, so loading the next block overlaps computing this
// one. A cycle spent waiting for a block pulses wstall.
//
// Results come back six cycles after issue and are added into the vertex
// accumulator half vset (onto zero for the first input chunk when init is set).
// The add is done in the cycle the result arrives, so there is no accumulator
// hazard. done pulses when the last result has been written.
module vertex_unit
  import grip_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  va_cmd_t     cmd,
  output logic        done,
  // weight sequencer handshake
  input  logic [1:0]  wfull,
  output logic        release_bank,
  output logic        wstall,
  // multiplier array
  output logic        mx_valid,
  output logic        mx_par,
  output logic        mx_bank,
  output logic [PE_ROWS*DATA_W-1:0] mx_x0,
  output logic [PE_ROWS*DATA_W-1:0] mx_x1,
  input  logic        my_valid,
  input  line_t       my_y,
  // edge accumulator (read half)
  output logic        ea_set,
  output logic [1:0]  ea_row [M_RD],
  output logic [1:0]  ea_chunk,
  input  logic [16*DATA_W-1:0] ea_data [M_RD],
  // vertex accumulator
  output logic        va_set,
  output logic [3:0]  va_a_v, va_b_v,
  output logic [3:0]  va_ch,
  input  line_t       va_a_rdata, va_b_rdata,
  output logic [1:0]  va_a_we, va_b_we,
  output line_t       va_a_wdata, va_b_wdata
);
  localparam int unsigned LAT = 6;
  typedef struct packed {
    logic       v;
    logic [3:0] vtx;
    logic       two;     // parallel mode with a second vertex
    logic [5:0] oc;
    logic       first;   // first input chunk of an init command
  } tag_t;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e  state;
  va_cmd_t c;
  logic [5:0] oc;
  logic [2:0] fc;
  logic [3:0] vtx;
  logic       cur;
  tag_t       tags [LAT];
  logic       step_ok, last_v;
  logic [3:0] vstep, v1;
  logic       has_v1;

  assign vstep   = c.par ? 4'd2 : 4'd1;
  assign v1      = vtx + 4'd1;
  assign has_v1  = c.par && (v1 < c.n_vert);
  assign step_ok = (state == S_RUN) && wfull[cur];
  assign last_v  = (vtx + vstep) >= c.n_vert;
  assign wstall  = (state == S_RUN) && !wfull[cur];
  assign release_bank = step_ok && last_v;

  // edge accumulator reads for vtx (and vtx+1 in parallel mode)
  assign ea_set   = c.eset;
  assign ea_chunk = fc[1:0];
  always_comb begin
    for (int k = 0; k < M_RD; k++) ea_row[k] = '0;
    ea_row[2'(vtx % 4'(M_RD))] = 2'(vtx / 4'(M_RD));
    ea_row[2'(v1 % 4'(M_RD))] = 2'(v1 / 4'(M_RD));
  end
  assign mx_valid = step_ok;
  assign mx_par   = c.par;
  assign mx_bank  = cur;
  assign mx_x0    = ea_data[2'(vtx % 4'(M_RD))];
  assign mx_x1    = has_v1 ? ea_data[2'(v1 % 4'(M_RD))] : '0;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state <= S_IDLE;
      for (int i = 0; i < LAT; i++) tags[i].v <= 1'b0;
    end else begin
      // result tags travel alongside the array pipeline
      tags[0].v     <= step_ok;
      tags[0].vtx   <= vtx;
      tags[0].two   <= has_v1;
      tags[0].oc    <= c.o_first + oc;
      tags[0].first <= c.init && fc == 3'd0;
      for (int i = 1; i < LAT; i++) tags[i] <= tags[i-1];
      unique case (state)
        S_IDLE: if (start) begin
          c <= cmd; oc <= '0; fc <= '0; vtx <= '0; cur <= 1'b0;
          state <= S_RUN;
        end
        S_RUN: if (step_ok) begin
          if (!last_v) vtx <= vtx + vstep;
          else begin
            vtx <= '0;
            cur <= ~cur;
            if (fc + 3'd1 < c.n_fchunk) fc <= fc + 3'd1;
            else begin
              fc <= '0;
              if (oc + 6'd1 < c.n_ochunk) oc <= oc + 6'd1;
              else state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: if (!tags[0].v && !tags[1].v && !tags[2].v && !tags[3].v && !tags[4].v && !tags[5].v) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // accumulate results
  tag_t t;
  assign t = tags[LAT-1];
  assign va_set = c.vset;
  assign va_a_v = t.vtx;
  assign va_b_v = t.vtx + 4'd1;
  assign va_ch  = c.par ? 4'(t.oc >> 1) : 4'(t.oc);
  always_comb begin
    line_t olda, oldb;
    va_a_we = '0;
    va_b_we = '0;
    olda = t.first ? '0 : va_a_rdata;
    oldb = t.first ? '0 : va_b_rdata;
    va_a_wdata = olda;
    va_b_wdata = oldb;
    if (my_valid) begin
      if (!c.par) begin
        va_a_we = 2'b11;
        for (int i = 0; i < XBAR_W; i++)
          va_a_wdata[DATA_W*i +: DATA_W] = qadd(line_el(olda, i), line_el(my_y, i));
      end else begin
        va_a_we = t.oc[0] ? 2'b10 : 2'b01;
        va_b_we = t.two ? va_a_we : 2'b00;
        for (int i = 0; i < 16; i++) begin
          va_a_wdata[DATA_W*(16*t.oc[0] + i) +: DATA_W] = qadd(line_el(olda, 16*t.oc[0] + i), line_el(my_y, i));
          va_b_wdata[DATA_W*(16*t.oc[0] + i) +: DATA_W] = qadd(line_el(oldb, 16*t.oc[0] + i), line_el(my_y, 16 + i));
        end
      end
    end
  end

`ifndef SYNTHESIS
  // The array's latency must match the tag pipeline.
  a_lat: assert property (@(posedge clk) disable iff (rst) my_valid == tags[LAT-1].v);
`endif
endmodule
