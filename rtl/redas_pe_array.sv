// redas_pe_array -- P x P mesh of redas_pe with bidirectional neighbour links.
//
// Every PE is joined to its four neighbours by one link in each direction;
// there are no long wires. A logical shape (square, wide rl x 4(P-rl) or
// tall 4(P-rl) x rl) and a dataflow (OS, WS, IS) are selected by an
// arr_cfg_t word. The word enters at the top row when cfg_load is high and
// moves down one row per cycle, so the whole array is configured in P
// cycles, top to bottom, as in the paper. Each PE decodes its own routing
// from the word of its row and its coordinates, which are given to it as
// constant inputs (so all PEs are one module); the decode is combinational.
//
// Edge ports: in_*/out_* [k] is the link of the k-th edge PE on that side
// (column for N/S, row for E/W); in_* feed the array, out_* leave it.
// phase, phase_start and clear are broadcast to all PEs.
//
// Follows the paper: mesh of neighbour links, sub-arrays chained through
// the corners, top-down configuration. Own choice: in WS/IS on wide shapes
// the ring lanes are fed from each side's edge banks instead of the corners.
module redas_pe_array
  import redas_pkg::*;
#(
  parameter int unsigned P = ARRAY_P_ELAB
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cfg_load,
  input  arr_cfg_t  cfg_in,
  input  phase_e    phase,
  input  logic      phase_start,
  input  logic      clear,
  input  link_t     in_n  [P],
  input  link_t     in_e  [P],
  input  link_t     in_s  [P],
  input  link_t     in_w  [P],
  output link_t     out_n [P],
  output link_t     out_e [P],
  output link_t     out_s [P],
  output link_t     out_w [P],
  output arr_cfg_t  row_cfg_last        // configuration held by the bottom row
);

  arr_cfg_t row_cfg [P];

  // configuration travels from the top row downwards, one row per cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(P); r++) row_cfg[r] <= '{df: DF_OS, shape: SH_SQUARE, rl: '0};
    end else begin
      if (cfg_load) row_cfg[0] <= cfg_in;
      for (int r = 1; r < int'(P); r++) row_cfg[r] <= row_cfg[r-1];
    end
  end
  assign row_cfg_last = row_cfg[P-1];

  // link nets: l_x[i][j] is the output of PE (i,j) towards direction x
  link_t l_n [P][P];
  link_t l_e [P][P];
  link_t l_s [P][P];
  link_t l_w [P][P];

  for (genvar i = 0; i < int'(P); i++) begin : g_row
    for (genvar j = 0; j < int'(P); j++) begin : g_col
      link_t i_n, i_e, i_s, i_w;
      assign i_n = (i == 0)         ? in_n[j] : l_s[i-1][j];
      assign i_s = (i == int'(P)-1) ? in_s[j] : l_n[i+1][j];
      assign i_w = (j == 0)         ? in_w[i] : l_e[i][j-1];
      assign i_e = (j == int'(P)-1) ? in_e[i] : l_w[i][j+1];
      redas_pe #(.P(P)) u_pe (
        .clk, .rst_n, .acfg(row_cfg[i]), .pos_i(16'(i)), .pos_j(16'(j)), .phase, .phase_start, .clear,
        .in_n(i_n), .in_e(i_e), .in_s(i_s), .in_w(i_w),
        .out_n(l_n[i][j]), .out_e(l_e[i][j]), .out_s(l_s[i][j]), .out_w(l_w[i][j])
      );
    end
  end

  for (genvar k = 0; k < int'(P); k++) begin : g_edge
    assign out_n[k] = l_n[0][k];
    assign out_s[k] = l_s[P-1][k];
    assign out_w[k] = l_w[k][0];
    assign out_e[k] = l_e[k][P-1];
  end

endmodule
