// redas_pkg -- shared types, constants and shape-mapping functions of the
// reshapeable systolic accelerator.
//
// The array is a P x P mesh of PEs. A logical shape is built from four
// equal sub-arrays A, B, C, D placed around the mesh with 4-fold rotational
// symmetry and chained end to end ("roundabout"). With a small dimension
// rl (1 <= rl <= P/2) and cs = P - rl, the wide shape is rl x 4*cs and the
// tall shape is 4*cs x rl; the square shape is the plain P x P array. This
// gives P + 1 logical shapes, as in the paper (Eq. 1).
//
// Two operand streams pass each active PE:
//   ring  stream: runs along the long logical dimension, through all four
//                 sub-arrays; between sub-arrays it takes pass-through PEs
//                 (the roundabout path, rl-1 extra registers per corner);
//   cross stream: runs along the short dimension, entering each sub-array
//                 from the edge of the mesh next to it.
// A tall shape is the transpose (rows <-> columns) of the wide one.
//
// The functions below are pure and synthesizable: pe_decode() gives the
// routing of one PE for a shape, edge_map() tells what an edge port of the
// mesh carries, and bank_plan() turns a GEMM instruction into the actions
// of one buffer bank in each phase. The routing of the corner paths and
// the sub-array placement follow the paper's figures of the 6x6 example;
// the encodings, the exit path of partial sums in tall shapes and the
// direct edge feed of the ring stream in wide WS/IS shapes are this
// design's own choices (see the README).
package redas_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned ARRAY_P    = 128;   // physical array side (Table 4: 128x128)
  parameter int unsigned ARRAY_P_ELAB = 64;  // default side of the elaborated array and top (see README)
  parameter int unsigned DATA_W     = 8;     // operand width (Table 4: Int8)
  parameter int unsigned ACC_W      = 32;    // partial sum / output width
  parameter int unsigned BANK_DEPTH = 4096;  // words per bank (Sec. 4.1)
  parameter int unsigned ADDR_W     = 12;    // log2(BANK_DEPTH)
  parameter int unsigned NUM_CH     = 8;     // DRAM channels (Table 4)
  parameter int unsigned DRAM_AW    = 32;    // DRAM word address width
  parameter int unsigned LEN_W      = 16;    // stream length field
  parameter int unsigned RL_W       = 16;    // width of the rl field
  parameter int unsigned LUT_SEG    = 16;    // NN-LUT segments
  parameter int unsigned SLOPE_FRAC = 8;     // fraction bits of NN-LUT slopes

  // ---------------------------------------------------------------- enums
  typedef enum logic [1:0] {DF_OS = 2'd0, DF_WS = 2'd1, DF_IS = 2'd2} dataflow_e;
  typedef enum logic [1:0] {SH_SQUARE = 2'd0, SH_WIDE = 2'd1, SH_TALL = 2'd2} shape_e;
  typedef enum logic [1:0] {PH_IDLE = 2'd0, PH_PRELOAD = 2'd1, PH_COMPUTE = 2'd2, PH_DRAIN = 2'd3} phase_e;
  // port directions, clockwise so that a 90 degree rotation adds one
  typedef enum logic [1:0] {D_N = 2'd0, D_E = 2'd1, D_S = 2'd2, D_W = 2'd3} dir_e;
  // what an edge port of the mesh carries
  typedef enum logic [1:0] {EK_NONE = 2'd0, EK_RING = 2'd1, EK_CROSS = 2'd2, EK_SQOUT = 2'd3} edge_kind_e;
  // what a bank does in one phase
  typedef enum logic [1:0] {BA_NONE = 2'd0, BA_ISSUE = 2'd1, BA_RECV = 2'd2} bank_act_e;
  // the bank roles of the paper, for status
  typedef enum logic [2:0] {BR_IDLE = 3'd0, BR_INPUT_ISSUER = 3'd1, BR_WEIGHT_ISSUER = 3'd2,
                            BR_OUTPUT_RECEIVER = 3'd3, BR_MIXED = 3'd4} bank_role_e;
  typedef enum logic [1:0] {OP_NOP = 2'd0, OP_GEMM = 2'd1, OP_SIMD = 2'd2, OP_DMA = 2'd3} opcode_e;
  typedef enum logic [1:0] {SO_COPY = 2'd0, SO_RELU = 2'd1, SO_PWL = 2'd2} simd_op_e;

  // ---------------------------------------------------------------- link
  typedef struct packed {
    logic                    v;
    logic signed [ACC_W-1:0] d;
  } link_t;

  // array configuration travelling down the rows
  typedef struct packed {
    dataflow_e        df;
    shape_e           shape;
    logic [RL_W-1:0]  rl;
  } arr_cfg_t;

  // routing of one PE
  typedef struct packed {
    logic  active;       // takes part in the GEMM
    dir_e  ring_in;      // ring stream enters from
    dir_e  ring_out;     // and leaves to
    dir_e  cross_in;     // cross stream (compute phase)
    dir_e  cross_out;
    dir_e  pre_in;       // stationary preload (edge -> centre)
    dir_e  pre_out;
    dir_e  drain_in;     // OS result drain (centre -> edge)
    dir_e  drain_out;
    logic  ring_psum;    // ring stream carries the partial sum
    logic  cross_psum;   // cross stream carries the partial sum
    logic  psum_first;   // partial sum chain starts here with zero
    logic  drain_last;   // innermost PE of the drain chain
    logic  pa_en;        // pass-through slot A
    dir_e  pa_in;
    dir_e  pa_out;
    logic  pb_en;        // pass-through slot B
    dir_e  pb_in;
    dir_e  pb_out;
  } pe_cfg_t;

  typedef struct packed {
    edge_kind_e       kind;
    logic [RL_W+1:0]  index;   // ring lane or cross (logical) position
  } edge_info_t;

  // GEMM tile instruction (mapper output)
  typedef struct packed {
    dataflow_e          df;
    shape_e             shape;
    logic [RL_W-1:0]    rl;        // small logical dimension (ignored for square)
    logic [LEN_W-1:0]   len;       // streamed length: K for OS, M_t for WS/IS
    logic [ADDR_W-1:0]  sta_base;  // stationary region of each bank
    logic [ADDR_W-1:0]  non_base;  // non-stationary region
    logic [ADDR_W-1:0]  out_base;  // output region
    logic               acc_en;    // accumulate into the output region (WS/IS)
  } gemm_t;

  typedef struct packed {
    simd_op_e           op;
    logic [1:0]         side;      // which buffer/SIMD unit: 0 N, 1 E, 2 S, 3 W
    logic [ADDR_W-1:0]  src;
    logic [ADDR_W-1:0]  dst;
    logic [ADDR_W:0]    len;
  } simd_t;

  typedef struct packed {
    logic               store;     // 1: bank -> DRAM, 0: DRAM -> bank
    logic [15:0]        bank;      // global bank number side*P + index
    logic [DRAM_AW-1:0] dram_addr;
    logic [ADDR_W-1:0]  bank_addr;
    logic [ADDR_W:0]    len;
  } dma_desc_t;

  typedef struct packed {
    opcode_e    op;
    gemm_t      gemm;
    simd_t      simd;
    dma_desc_t  dma;
  } instr_t;

  typedef struct packed {
    bank_act_e          act;
    logic [LEN_W+RL_W+2:0] off;   // start cycle within the phase
    logic [LEN_W-1:0]   len;
    logic [ADDR_W-1:0]  base;
    logic               acc;      // receive accumulates
  } phase_plan_t;

  typedef struct packed {
    phase_plan_t pre;
    phase_plan_t comp;
    phase_plan_t drn;
    bank_role_e  role;
  } bank_plan_t;

  // ---------------------------------------------------------------- helpers
  function automatic dir_e dir_rot(dir_e d, int unsigned k);
    return dir_e'(2'((int'(d) + int'(k)) % 4));
  endfunction

  function automatic dir_e dir_transpose(dir_e d);
    case (d)
      D_N: return D_W;
      D_W: return D_N;
      D_E: return D_S;
      default: return D_E;
    endcase
  endfunction

  function automatic pe_cfg_t pe_cfg_transpose(pe_cfg_t c);
    pe_cfg_t t = c;
    t.ring_in   = dir_transpose(c.ring_in);
    t.ring_out  = dir_transpose(c.ring_out);
    t.cross_in  = dir_transpose(c.cross_in);
    t.cross_out = dir_transpose(c.cross_out);
    t.pre_in    = dir_transpose(c.pre_in);
    t.pre_out   = dir_transpose(c.pre_out);
    t.drain_in  = dir_transpose(c.drain_in);
    t.drain_out = dir_transpose(c.drain_out);
    t.pa_in     = dir_transpose(c.pa_in);
    t.pa_out    = dir_transpose(c.pa_out);
    t.pb_in     = dir_transpose(c.pb_in);
    t.pb_out    = dir_transpose(c.pb_out);
    return t;
  endfunction

  // effective rl of a configuration (square: P)
  function automatic int rl_eff(arr_cfg_t c, int p);
    if (c.shape == SH_SQUARE) return p;
    if (int'(c.rl) < 1) return 1;
    if (int'(c.rl) > p / 2) return p / 2;
    return int'(c.rl);
  endfunction

  // depth of the cross dimension (preload and drain length)
  function automatic int cross_depth(arr_cfg_t c, int p);
    return rl_eff(c, p);
  endfunction

  // extra ring delay before logical ring position pos (corner pass PEs)
  function automatic int ring_extra(arr_cfg_t c, int p, int pos);
    int rl = rl_eff(c, p);
    int cs = p - rl;
    if (c.shape == SH_SQUARE) return 0;
    if (c.shape == SH_WIDE && c.df != DF_OS) return 0;  // direct edge feed, no corners
    return (rl - 1) * (pos / cs);
  endfunction

  // --------------------------------------------------------- PE routing
  // Routing of PE (i, j) for configuration c in a P x P mesh.
  function automatic pe_cfg_t pe_decode(arr_cfg_t c, int p, int i, int j);
    pe_cfg_t r;
    int rl, cs, fi, fj, ci, cj, ti, lane;
    logic psum_mode, corners, ring_psum, cross_psum;
    logic have_ovr;
    dir_e ovr;
    r = '0;
    r.ring_in = D_W;  r.ring_out = D_E;
    r.cross_in = D_N; r.cross_out = D_S;
    r.pre_in = D_N;   r.pre_out = D_S;
    r.drain_in = D_S; r.drain_out = D_N;
    r.pa_in = D_W; r.pa_out = D_E; r.pb_in = D_S; r.pb_out = D_N;
    psum_mode = (c.df != DF_OS);
    if (c.shape == SH_SQUARE) begin
      r.active     = 1'b1;
      r.cross_psum = psum_mode;
      r.psum_first = psum_mode && (i == 0);
      r.drain_last = (i == p - 1);
      return r;
    end
    rl = rl_eff(c, p);
    cs = p - rl;
    ring_psum  = psum_mode && (c.shape == SH_TALL);
    cross_psum = psum_mode && (c.shape == SH_WIDE);
    corners    = !cross_psum;
    // canonical (wide) frame
    if (c.shape == SH_TALL) begin fi = j; fj = i; end
    else begin fi = i; fj = j; end
    have_ovr = 1'b0;
    ovr = D_N;
    for (int k = 0; k < 4; k++) begin
      // rotate back by k quarter turns: rot^-1 (a, b) = (p-1-b, a)
      ci = fi; cj = fj;
      for (int q = 0; q < k; q++) begin
        ti = ci;
        ci = p - 1 - cj;
        cj = ti;
      end
      // (a) sub-array k compute
      if (ci < rl && cj < cs) begin
        r.active     = 1'b1;
        r.ring_in    = dir_rot(D_W, k);
        r.ring_out   = dir_rot(D_E, k);
        r.ring_psum  = ring_psum;
        r.cross_psum = cross_psum;
        if (cross_psum) begin            // partial sums flow outward
          r.cross_in  = dir_rot(D_S, k);
          r.cross_out = dir_rot(D_N, k);
          r.psum_first = (ci == rl - 1);
        end else begin                    // operands flow inward
          r.cross_in  = dir_rot(D_N, k);
          r.cross_out = dir_rot(D_S, k);
          r.psum_first = ring_psum && (k == 0) && (cj == 0);
        end
        r.pre_in    = dir_rot(D_N, k);
        r.pre_out   = dir_rot(D_S, k);
        r.drain_in  = dir_rot(D_S, k);
        r.drain_out = dir_rot(D_N, k);
        r.drain_last = (ci == rl - 1);
      end
      // (b) corner path from sub-array k to sub-array k+1 (lies in region k+1)
      if (corners && k < 3 && ci < cs && cj >= cs) begin
        // horizontal leg of lane ci
        if (ci < rl && cj < p - 1 - ci) begin
          r.pa_en = 1'b1; r.pa_in = dir_rot(D_W, k); r.pa_out = dir_rot(D_E, k);
        end else if (ci < rl && ci > 0 && cj == p - 1 - ci) begin
          r.pa_en = 1'b1; r.pa_in = dir_rot(D_W, k); r.pa_out = dir_rot(D_N, k);
        end
        // vertical leg of lane lane = p-1-cj
        lane = p - 1 - cj;
        if (lane >= 1 && lane < rl && ci >= 1 && ci < lane) begin
          r.pb_en = 1'b1; r.pb_in = dir_rot(D_S, k); r.pb_out = dir_rot(D_N, k);
        end
        // destination: first PE of lane in sub-array k+1
        if (ci == 0 && lane < rl) begin
          have_ovr = 1'b1;
          ovr = (lane == 0) ? dir_rot(D_W, k) : dir_rot(D_S, k);
        end
      end
      // (c) exit path of ring partial sums, from the end of D to the entry edge
      if (ring_psum && k == 0 && ci < rl && cj < rl) begin
        if (ci > cj) begin
          r.pa_en = 1'b1; r.pa_in = D_E; r.pa_out = D_W;
          r.pb_en = 1'b1; r.pb_in = D_S; r.pb_out = D_N;
        end else if (ci == cj) begin
          r.pa_en = 1'b1; r.pa_in = D_S; r.pa_out = D_W;
        end
      end
    end
    if (have_ovr) r.ring_in = ovr;
    if (c.shape == SH_TALL) r = pe_cfg_transpose(r);
    return r;
  endfunction

  // --------------------------------------------------------- edge ports
  // side: 0 N, 1 E, 2 S, 3 W ; idx: column for N/S, row for E/W
  function automatic edge_info_t edge_map(arr_cfg_t c, int p, int side, int idx);
    edge_info_t e;
    int rl, cs, fs;
    e.kind = EK_NONE;
    e.index = '0;
    if (c.shape == SH_SQUARE) begin
      if (side == 3)      begin e.kind = EK_RING;  e.index = (RL_W+2)'(idx); end
      else if (side == 0) begin e.kind = EK_CROSS; e.index = (RL_W+2)'(idx); end
      else if (side == 2 && c.df != DF_OS) begin e.kind = EK_SQOUT; e.index = (RL_W+2)'(idx); end
      return e;
    end
    rl = rl_eff(c, p);
    cs = p - rl;
    fs = side;
    if (c.shape == SH_TALL) fs = (side == 0) ? 3 : (side == 3) ? 0 : (side == 1) ? 2 : 1;
    case (fs)
      0: if (idx < cs) begin e.kind = EK_CROSS; e.index = (RL_W+2)'(idx); end
         else if (c.shape == SH_WIDE && c.df != DF_OS) begin e.kind = EK_RING; e.index = (RL_W+2)'(p - 1 - idx); end
      1: if (idx < cs) begin e.kind = EK_CROSS; e.index = (RL_W+2)'(cs + idx); end
         else if (c.shape == SH_WIDE && c.df != DF_OS) begin e.kind = EK_RING; e.index = (RL_W+2)'(p - 1 - idx); end
      2: if (idx >= rl) begin e.kind = EK_CROSS; e.index = (RL_W+2)'(2*cs + p - 1 - idx); end
         else if (c.shape == SH_WIDE && c.df != DF_OS) begin e.kind = EK_RING; e.index = (RL_W+2)'(idx); end
      default: if (idx >= rl) begin e.kind = EK_CROSS; e.index = (RL_W+2)'(3*cs + p - 1 - idx); end
               else begin e.kind = EK_RING; e.index = (RL_W+2)'(idx); end
    endcase
    return e;
  endfunction

  // cycles of the compute phase for a GEMM tile (safe bound, see README)
  function automatic int compute_cycles(arr_cfg_t c, int p, int len);
    int rl = rl_eff(c, p);
    if (c.shape == SH_SQUARE) return len + 3 * p + 4;
    return len + 2 * (4 * (p - rl)) + 6 * rl + 6;
  endfunction

  function automatic phase_plan_t pp(bank_act_e a, int off, int len, logic [ADDR_W-1:0] base, logic acc);
    phase_plan_t x;
    x.act  = a;
    x.off  = ($bits(x.off))'(off);
    x.len  = LEN_W'(len);
    x.base = base;
    x.acc  = acc;
    return x;
  endfunction

  // actions of the bank at (side, idx) for a GEMM tile g
  function automatic bank_plan_t bank_plan(gemm_t g, int p, int side, int idx);
    bank_plan_t b;
    arr_cfg_t c;
    edge_info_t e;
    int rl, depth, ix;
    c.df = g.df; c.shape = g.shape; c.rl = g.rl;
    b = '0;
    b.role = BR_IDLE;
    e = edge_map(c, p, side, idx);
    rl = rl_eff(c, p);
    depth = cross_depth(c, p);
    ix = int'(e.index);
    if (e.kind == EK_NONE) return b;
    if (g.df == DF_OS) begin
      if (e.kind == EK_RING) begin
        b.comp = pp(BA_ISSUE, ix, int'(g.len), g.non_base, 1'b0);
        b.role = (g.shape == SH_TALL) ? BR_WEIGHT_ISSUER : BR_INPUT_ISSUER;
      end else if (e.kind == EK_CROSS) begin
        b.comp = pp(BA_ISSUE, ix + ring_extra(c, p, ix), int'(g.len), g.non_base, 1'b0);
        b.drn  = pp(BA_RECV, 0, depth, g.out_base, 1'b0);
        b.role = (g.shape == SH_TALL) ? BR_INPUT_ISSUER : BR_WEIGHT_ISSUER;
      end
    end else begin
      // stationary-operand dataflows (WS: weights stationary, IS: inputs)
      if (e.kind == EK_CROSS)
        b.pre = pp(BA_ISSUE, 0, depth, g.sta_base, 1'b0);
      if (g.shape == SH_SQUARE) begin
        if (e.kind == EK_RING)  b.comp = pp(BA_ISSUE, ix, int'(g.len), g.non_base, 1'b0);
        if (e.kind == EK_SQOUT) b.comp = pp(BA_RECV, 0, int'(g.len), g.out_base, g.acc_en);
      end else if (g.shape == SH_WIDE) begin
        if (e.kind == EK_RING)  b.comp = pp(BA_ISSUE, rl - 1 - ix, int'(g.len), g.non_base, 1'b0);
        if (e.kind == EK_CROSS) b.comp = pp(BA_RECV, 0, int'(g.len), g.out_base, g.acc_en);
      end else begin
        if (e.kind == EK_CROSS) b.comp = pp(BA_ISSUE, ix + ring_extra(c, p, ix), int'(g.len), g.non_base, 1'b0);
        if (e.kind == EK_RING)  b.comp = pp(BA_RECV, 0, int'(g.len), g.out_base, g.acc_en);
      end
      if (b.comp.act == BA_RECV && b.pre.act == BA_ISSUE) b.role = BR_MIXED;
      else if (b.comp.act == BA_RECV) b.role = BR_OUTPUT_RECEIVER;
      else if (b.pre.act == BA_ISSUE) b.role = (g.df == DF_WS) ? BR_WEIGHT_ISSUER : BR_INPUT_ISSUER;
      else if (b.comp.act == BA_ISSUE) b.role = (g.df == DF_WS) ? BR_INPUT_ISSUER : BR_WEIGHT_ISSUER;
    end
    return b;
  endfunction

endpackage
