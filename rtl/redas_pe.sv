// redas_pe -- processing element of the reshapeable systolic array.
//
// The PE has four input and four output ports, one pair per neighbour
// (N, E, S, W), so the links between neighbours are bidirectional. Its
// routing is decoded inside the PE from the array configuration word of
// its row (acfg) and its own coordinates (pos_i, pos_j, tied to constants
// by the array) through redas_pkg::pe_decode, giving a pe_cfg_t word:
//   * operation data: a ring operand and a cross operand are picked from
//     two of the input ports, fed to the MAC and forwarded, registered, to
//     the ports named by ring_out / cross_out;
//   * pass-through data: up to two further streams (slots A and B) are
//     copied, registered, from an input port to an output port, straight
//     or with a 90 degree turn -- this is the roundabout data path.
// These correspond to the input crossbars, the operand-reordering
// crossbars around the MAC and the turning crossbar of the paper's PE.
//
// Calculation patterns (paper: three patterns selected by crossbars):
//   OS  (neither psum flag): acc += ring * cross on every cycle both
//        operands are valid; acc is cleared by `clear`.
//   WS/IS, cross_psum: cross_out = cross_in + ring * stat (cross_in taken
//        as 0 when psum_first); the ring operand is forwarded.
//   WS/IS, ring_psum : ring_out = ring_in + cross * stat; the cross
//        operand is forwarded.
// Phases: PRELOAD shifts the stationary register along pre_in -> pre_out
// (edge to centre), one hop per cycle. DRAIN (OS) loads the accumulator at
// phase_start and shifts results along drain_in -> drain_out (centre to
// edge). Every output is registered: one cycle per hop for operation and
// pass-through data alike. Operands are DATA_W-bit signed values carried in
// the low bits of the ACC_W-bit link; partial sums use the full width.
//
// Follows the paper: four-port PE with crossbars, three calculation
// patterns and a turning path. Own choice: the two-slot pass-through
// encoding and the output priority (preload, drain, pass A, pass B, ring,
// cross).
module redas_pe
  import redas_pkg::*;
#(
  parameter int unsigned P = ARRAY_P
) (
  input  logic     clk,
  input  logic     rst_n,
  input  arr_cfg_t acfg,
  input  logic [15:0] pos_i,
  input  logic [15:0] pos_j,
  input  phase_e   phase,
  input  logic     phase_start,
  input  logic     clear,
  input  link_t    in_n, in_e, in_s, in_w,
  output link_t    out_n, out_e, out_s, out_w
);

  pe_cfg_t cfg;
  assign cfg = pe_decode(acfg, int'(P), int'(pos_i), int'(pos_j));

  link_t in_p [4];
  assign in_p[D_N] = in_n;
  assign in_p[D_E] = in_e;
  assign in_p[D_S] = in_s;
  assign in_p[D_W] = in_w;

  link_t ring_i, cross_i, pre_i, drain_i;
  assign ring_i  = in_p[cfg.ring_in];
  assign cross_i = in_p[cfg.cross_in];
  assign pre_i   = in_p[cfg.pre_in];
  assign drain_i = in_p[cfg.drain_in];

  logic signed [DATA_W-1:0] stat_q;            // stationary data register
  logic signed [ACC_W-1:0]  acc_q;             // OS accumulator
  link_t ring_q, cross_q, pa_q, pb_q, drain_q; // pipelining registers

  logic signed [DATA_W-1:0] a_op, b_op;        // MAC operands after reorder
  logic signed [ACC_W-1:0]  psum_in, mac_out;
  logic                     mac_v;

  always_comb begin
    // operand reordering for the three patterns
    if (cfg.ring_psum) begin
      a_op    = cross_i.d[DATA_W-1:0];
      b_op    = stat_q;
      psum_in = cfg.psum_first ? '0 : ring_i.d;
      mac_v   = cross_i.v;
    end else if (cfg.cross_psum) begin
      a_op    = ring_i.d[DATA_W-1:0];
      b_op    = stat_q;
      psum_in = cfg.psum_first ? '0 : cross_i.d;
      mac_v   = ring_i.v;
    end else begin
      a_op    = ring_i.d[DATA_W-1:0];
      b_op    = cross_i.d[DATA_W-1:0];
      psum_in = acc_q;
      mac_v   = ring_i.v && cross_i.v;
    end
    mac_out = psum_in + ACC_W'(a_op) * ACC_W'(b_op);
  end

  wire computing = cfg.active && (phase == PH_COMPUTE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_q  <= '0;
      acc_q   <= '0;
      ring_q  <= '0;
      cross_q <= '0;
      pa_q    <= '0;
      pb_q    <= '0;
      drain_q <= '0;
    end else begin
      // pass-through slots run in every phase
      pa_q <= cfg.pa_en ? in_p[cfg.pa_in] : '0;
      pb_q <= cfg.pb_en ? in_p[cfg.pb_in] : '0;
      if (clear) acc_q <= '0;
      else if (computing && !cfg.ring_psum && !cfg.cross_psum && mac_v) acc_q <= mac_out;
      if (cfg.active && phase == PH_PRELOAD) stat_q <= pre_i.d[DATA_W-1:0];
      if (computing) begin
        if (cfg.ring_psum) begin
          ring_q  <= '{v: mac_v, d: mac_out};
          cross_q <= cross_i;
        end else if (cfg.cross_psum) begin
          ring_q  <= ring_i;
          cross_q <= '{v: mac_v, d: mac_out};
        end else begin
          ring_q  <= ring_i;
          cross_q <= cross_i;
        end
      end else begin
        ring_q  <= '0;
        cross_q <= '0;
      end
      if (cfg.active && phase == PH_DRAIN) begin
        if (phase_start)          drain_q <= '{v: 1'b1, d: acc_q};
        else if (cfg.drain_last)  drain_q <= '0;
        else                      drain_q <= drain_i;
      end else begin
        drain_q <= '0;
      end
    end
  end

  // output crossbars
  link_t out_p [4];
  always_comb begin
    for (int o = 0; o < 4; o++) begin
      out_p[o] = '0;
      if (cfg.active && phase == PH_PRELOAD && cfg.pre_out == dir_e'(o))
        out_p[o] = '{v: 1'b1, d: ACC_W'(stat_q)};
      else if (cfg.active && phase == PH_DRAIN && cfg.drain_out == dir_e'(o))
        out_p[o] = drain_q;
      else if (cfg.pa_en && cfg.pa_out == dir_e'(o))
        out_p[o] = pa_q;
      else if (cfg.pb_en && cfg.pb_out == dir_e'(o))
        out_p[o] = pb_q;
      else if (cfg.active && cfg.ring_out == dir_e'(o))
        out_p[o] = ring_q;
      else if (cfg.active && cfg.cross_out == dir_e'(o))
        out_p[o] = cross_q;
    end
  end

  assign out_n = out_p[D_N];
  assign out_e = out_p[D_E];
  assign out_s = out_p[D_S];
  assign out_w = out_p[D_W];

endmodule
