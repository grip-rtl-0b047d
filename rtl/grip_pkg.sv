// grip_pkg: sizes, number format and command encoding shared by every block of
// the GRIP graph-neural-network inference accelerator.
//
// Numbers are 16-bit two's-complement fixed point (the paper fixes the width at
// 16 bits); the binary point sits at 8 fractional bits (Q8.8), which is this
// design's choice. Array sizes follow the paper's main configuration: four
// prefetch lanes (one per DRAM channel), a 32-element crossbar port, a 16x32
// multiplier array, edge-accumulator tiles of 12 vertices x 64 elements, a 2 MiB
// global weight buffer and 2 x 64 KiB tile buffer. The command word layout,
// opcodes and status format are this design's own.
package grip_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int unsigned DATA_W = 16;           // element width
  localparam int unsigned FRAC   = 8;            // datapath fractional bits
  typedef logic signed [DATA_W-1:0] elem_t;
  localparam elem_t ELEM_MAX = 16'sh7fff;
  localparam elem_t ELEM_MIN = -16'sh8000;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_PF     = 4;    // prefetch lanes = DRAM channels
  localparam int unsigned M_RD     = 4;    // reduce lanes
  localparam int unsigned XBAR_W   = 32;   // elements per crossbar beat
  localparam int unsigned F_TILE   = 64;   // f: elements per vertex in a tile
  localparam int unsigned M_TILE   = 12;   // m: vertices per tile
  localparam int unsigned BEATS    = F_TILE / XBAR_W;           // 2
  localparam int unsigned EROWS    = (M_TILE + M_RD - 1) / M_RD; // 3 vertices per eacc bank
  localparam int unsigned PE_ROWS  = 16;
  localparam int unsigned PE_COLS  = 32;
  localparam int unsigned O_MAX    = 512;  // widest layer output
  localparam int unsigned VCHUNKS  = O_MAX / XBAR_W;             // 16 x 32-element chunks
  localparam int unsigned WRD_W    = 64;   // weights per weight-buffer word
  localparam int unsigned GWB_WORDS  = 16384;  // 2 MiB / 128 B
  localparam int unsigned TILE_WORDS = 512;    // 64 KiB / 128 B per half
  localparam int unsigned FEAT_WORDS = 256;    // 16 KiB of source features per bank
  localparam int unsigned EDGE_ROWS  = 64;     // 4 KiB of edge records per bank (64 x 16 words)
  localparam int unsigned DST_WORDS  = 64;     // 4 KiB of destination features per reduce lane
  localparam int unsigned LINE_W   = XBAR_W * DATA_W;  // 512-bit line
  typedef logic [LINE_W-1:0] line_t;           // 32 elements, element i at [16*i +: 16]

  // ---------------------------------------------------------------- fixed point helpers
  function automatic elem_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767) return ELEM_MAX;
    if (v < -48'sd32768) return ELEM_MIN;
    return elem_t'(v[15:0]);
  endfunction

  function automatic elem_t qadd(input elem_t a, input elem_t b);
    return sat16(48'(a) + 48'(b));
  endfunction

  function automatic elem_t qmul(input elem_t a, input elem_t b);
    logic signed [31:0] p;
    p = a * b;
    return sat16(48'(p >>> FRAC));
  endfunction

  function automatic elem_t line_el(input line_t l, input int unsigned i);
    return elem_t'(l[DATA_W*i +: DATA_W]);
  endfunction

  // ---------------------------------------------------------------- PE operations
  typedef enum logic [2:0] {G_SRC = 3'd0, G_DST = 3'd1, G_ADD = 3'd2, G_MUL = 3'd3, G_SCALE = 3'd4} gather_op_e;
  typedef enum logic [1:0] {R_SUM = 2'd0, R_MAX = 2'd1, R_MEAN = 2'd2} reduce_op_e;

  // ---------------------------------------------------------------- edge message
  // One crossbar beat: XBAR_W source elements for one edge.
  typedef struct packed {
    logic [3:0] dst;     // output vertex within the tile, 0..M_TILE-1
    elem_t      coef;    // per-edge coefficient (1/deg(v) for mean)
    logic       beat;    // which XBAR_W slice of the F_TILE tile
    line_t      data;    // source feature slice h_u
  } edge_msg_t;

  // Edge memory formats (32-bit words).
  typedef struct packed {
    logic [7:0]  feat_addr;  // first feature word of the source vertex
    logic [9:0]  first;      // index of its first edge record
    logic [7:0]  count;      // number of outgoing edges in this partition
    logic [5:0]  rsvd;
  } vlist_t;
  typedef struct packed {
    logic [3:0]  dst;        // output vertex within the tile
    logic [11:0] rsvd;
    elem_t       coef;
  } erec_t;

  // ---------------------------------------------------------------- commands
  typedef enum logic [3:0] {
    OP_NOP = 4'd0, OP_LOAD = 4'd1, OP_STORE = 4'd2, OP_FILL = 4'd3, OP_EDGE = 4'd4,
    OP_VERTEX = 4'd5, OP_UPDATE = 4'd6, OP_BARRIER = 4'd7, OP_CFG = 4'd8
  } opcode_e;

  typedef enum logic [1:0] {T_SRC_FEAT = 2'd0, T_SRC_EDGE = 2'd1, T_DST_FEAT = 2'd2, T_GWB = 2'd3} mem_target_e;
  typedef enum logic [1:0] {D_NF = 2'd0, D_EACC = 2'd1, D_VACC = 2'd2} upd_dest_e;

  localparam int unsigned ARG_W = 124;

  typedef struct packed {          // OP_LOAD / OP_STORE
    logic [1:0]  ch;               // DRAM channel = nodeflow bank
    mem_target_e target;
    logic [31:0] dram_addr;        // first DRAM line
    logic [15:0] buf_addr;         // first buffer line (GWB: half-word index)
    logic [15:0] count;            // lines to move
    logic [55:0] rsvd;
  } mem_cmd_t;

  typedef struct packed {          // OP_FILL: global weight buffer -> tile buffer half
    logic        tsel;
    logic [13:0] gwb_addr;
    logic [9:0]  tile_addr;
    logic [9:0]  count;            // words
    logic [88:0] rsvd;
  } fill_cmd_t;

  typedef struct packed {          // OP_EDGE: edge-accumulate one partition column
    logic        eset;             // edge-accumulator half written
    logic        clear;            // start a new tile (entries read as identity)
    logic        use_r0;           // enable stage R0 (read destination features)
    gather_op_e  gop;
    reduce_op_e  rop;
    elem_t       gconst;           // constant for G_SCALE
    logic [9:0]  vlist_base;       // first vertex-list word in every bank
    logic [31:0] n_src;            // 4 x 8-bit source-vertex counts, lane i at [8*i]
    logic [7:0]  feat_off;         // word offset of the tile slice in a feature vector
    logic [1:0]  beats;            // slices of XBAR_W per edge (1..BEATS)
    logic [5:0]  dst_base;         // destination-feature base line
    logic [3:0]  dst_stride;       // lines per destination vertex
    logic [37:0] rsvd;
  } ea_cmd_t;

  typedef struct packed {          // OP_VERTEX: vertex-accumulate one tile
    logic        eset;             // edge-accumulator half read
    logic        vset;             // vertex-accumulator half updated
    logic        init;             // accumulate onto zero instead of the old a_v
    logic        par;              // 0 = cooperative (16x32), 1 = parallel (2 x 16x16)
    logic [3:0]  n_vert;           // vertices in the tile (1..M_TILE)
    logic [2:0]  n_fchunk;         // 16-element input chunks (1..F_TILE/16)
    logic [5:0]  n_ochunk;         // 32 (coop) or 16 (par) element output chunks
    logic [5:0]  o_first;          // first output chunk (for slicing wide layers)
    logic        tsel;             // tile-buffer half read
    logic [9:0]  tile_addr;        // first tile word
    logic [89:0] rsvd;
  } va_cmd_t;

  typedef struct packed {          // OP_UPDATE: vertex-update one tile
    logic        vset;             // vertex-accumulator half read
    logic [3:0]  n_vert;
    logic [4:0]  n_chunk;          // 32-element chunks per vertex
    logic        lut;              // 0 = ReLU, 1 = LUT
    upd_dest_e   dest;
    logic        dset;             // half written for D_EACC / D_VACC
    logic [7:0]  nf_base;          // D_NF: first feature line
    logic [4:0]  nf_stride;        // D_NF: lines per vertex
    logic [96:0] rsvd;
  } upd_cmd_t;

  typedef struct packed {          // OP_CFG: write one activation configuration register
    logic [7:0]   addr;
    elem_t        data;
    logic [99:0]  rsvd;
  } cfg_cmd_t;

  typedef struct packed {
    opcode_e           op;
    logic [ARG_W-1:0]  arg;
  } cmd_t;

  // Activation configuration register map (OP_CFG addresses).
  localparam int unsigned CFG_L1   = 0;    // 0..32  first-level LUT
  localparam int unsigned CFG_L2   = 33;   // 33..41 second-level LUT
  localparam int unsigned CFG_A    = 42;   // level-1 range exponent a (0..3)
  localparam int unsigned CFG_B    = 43;   // level-2 range exponent b (0..3)
  localparam int unsigned CFG_OVF  = 44;   // bit0: positive side linear, bit1: negative side linear
  localparam int unsigned CFG_PS   = 45;   // positive slope   (Q8.8)
  localparam int unsigned CFG_PI   = 46;   // positive offset  (Q8.8)
  localparam int unsigned CFG_NS   = 47;   // negative slope
  localparam int unsigned CFG_NI   = 48;   // negative offset

  // Activation configuration as held by the update unit.
  typedef struct packed {
    elem_t [32:0] l1;       // level-1 table, entry i at -2^a + i*2^(a+1)/32
    elem_t [8:0]  l2;       // level-2 table, entry i at -2^b + i*2^(b+1)/8
    logic  [1:0]  a;
    logic  [1:0]  b;
    logic         pos_lin;  // above +2^b: 1 = linear function, 0 = clamp to l2[8]
    logic         neg_lin;  // below -2^b: 1 = linear function, 0 = clamp to l2[0]
    elem_t        ps, pi, ns, ni;
  } act_cfg_t;

  // Unit indices for busy/done tracking.
  localparam int unsigned U_MEM0 = 0, U_FILL = 4, U_EDGE = 5, U_VERT = 6, U_UPD = 7, N_UNITS = 8;

endpackage
