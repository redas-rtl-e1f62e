// tb_redas_pe_array -- self-checking test of the reshapeable PE mesh.
//
// A 6x6 mesh (the size of the paper's worked example) is taken through
// every logical shape it has -- square 6x6, wide 1x20, 2x16, 3x12 and tall
// 20x1, 16x2, 12x3 -- under OS, WS and IS. The testbench plays the part of
// the buffers: it drives the edge ports with skewed streams derived from
// redas_pkg::edge_map / ring_extra, collects what leaves the mesh, and
// compares it with products of random matrices computed here. For the
// stationary dataflows it also checks that the cycle of the last output
// stays within the paper's execution-time model
//   T = (R_l + C_l + M_t - 1) + 4 * min(R_l, C_l)   (square: no 4*min term).
module tb_redas_pe_array;
  import redas_pkg::*;

  localparam int P    = 6;
  localparam int MAXL = 12;
  localparam int MAXP = 4 * P;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  arr_cfg_t cfg;
  logic     cfg_load, phase_start, clear;
  phase_e   phase;
  link_t    tin  [4][P];
  link_t    tout [4][P];
  link_t    in_n [P], in_e [P], in_s [P], in_w [P];
  link_t    out_n[P], out_e[P], out_s[P], out_w[P];
  arr_cfg_t row_cfg_last;

  always_comb begin
    for (int k = 0; k < P; k++) begin
      in_n[k] = tin[0][k]; in_e[k] = tin[1][k]; in_s[k] = tin[2][k]; in_w[k] = tin[3][k];
      tout[0][k] = out_n[k]; tout[1][k] = out_e[k]; tout[2][k] = out_s[k]; tout[3][k] = out_w[k];
    end
  end

  redas_pe_array #(.P(P)) dut (
    .clk, .rst_n, .cfg_load, .cfg_in(cfg), .phase, .phase_start, .clear,
    .in_n, .in_e, .in_s, .in_w, .out_n, .out_e, .out_s, .out_w, .row_cfg_last
  );

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin : watchdog
    #(2_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operand matrices
  int rm [MAXP][MAXL];   // ring operand  [lane][k]   (OS)
  int xm [MAXP][MAXL];   // cross operand [pos][k]    (OS)
  int sm [MAXP][MAXP];   // stationary    [depth][pos]
  int st [MAXL][MAXP];   // streamed      [m][lane or pos]
  int q  [4][P][$];      // collected outputs per edge port

  function automatic int rnd8();
    return int'($urandom_range(0, 30)) - 15;
  endfunction

  task automatic clear_inputs();
    for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) tin[s][k] = '0;
  endtask

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_case(dataflow_e df, shape_e sh, int rl_in, int len);
    int rl, depth, npos, cs, tcomp, last_out, bound, rdim, cdim;
    edge_info_t e;
    cfg = '{df: df, shape: sh, rl: RL_W'(rl_in)};
    rl    = rl_eff(cfg, P);
    depth = cross_depth(cfg, P);
    cs    = P - rl;
    npos  = (sh == SH_SQUARE) ? P : 4 * cs;
    for (int a = 0; a < MAXP; a++) for (int b = 0; b < MAXL; b++) begin rm[a][b] = rnd8(); xm[a][b] = rnd8(); end
    for (int a = 0; a < MAXP; a++) for (int b = 0; b < MAXP; b++) sm[a][b] = rnd8();
    for (int a = 0; a < MAXL; a++) for (int b = 0; b < MAXP; b++) st[a][b] = rnd8();
    for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) q[s][k].delete();
    // configure: the word walks down the rows in P cycles
    @(negedge clk);
    cfg_load = 1'b1;
    @(negedge clk);
    cfg_load = 1'b0;
    repeat (P) @(negedge clk);
    checks++;
    if (row_cfg_last !== cfg) begin failures++; $display("FAIL config did not reach the last row"); end
    // preload of the stationary operand
    if (df != DF_OS) begin
      phase = PH_PRELOAD;
      for (int t = 0; t < depth; t++) begin
        clear_inputs();
        for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
          e = edge_map(cfg, P, s, k);
          if (e.kind == EK_CROSS) tin[s][k] = '{v: 1'b1, d: ACC_W'(sm[depth-1-t][int'(e.index)])};
        end
        @(negedge clk);
      end
    end
    // compute
    clear_inputs();
    clear = 1'b1;
    phase = PH_IDLE;
    @(negedge clk);
    clear = 1'b0;
    phase = PH_COMPUTE;
    tcomp = compute_cycles(cfg, P, len);
    last_out = -1;
    for (int t = 0; t < tcomp; t++) begin
      clear_inputs();
      for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
        int ix, o;
        e  = edge_map(cfg, P, s, k);
        ix = int'(e.index);
        if (df == DF_OS) begin
          if (e.kind == EK_RING) begin
            o = t - ix;
            if (o >= 0 && o < len) tin[s][k] = '{v: 1'b1, d: ACC_W'(rm[ix][o])};
          end else if (e.kind == EK_CROSS) begin
            o = t - ix - ring_extra(cfg, P, ix);
            if (o >= 0 && o < len) tin[s][k] = '{v: 1'b1, d: ACC_W'(xm[ix][o])};
          end
        end else if (sh == SH_WIDE) begin
          if (e.kind == EK_RING) begin
            o = t - (rl - 1 - ix);
            if (o >= 0 && o < len) tin[s][k] = '{v: 1'b1, d: ACC_W'(st[o][ix])};
          end
        end else if (sh == SH_TALL) begin
          if (e.kind == EK_CROSS) begin
            o = t - ix - ring_extra(cfg, P, ix);
            if (o >= 0 && o < len) tin[s][k] = '{v: 1'b1, d: ACC_W'(st[o][ix])};
          end
        end else begin
          if (e.kind == EK_RING) begin
            o = t - ix;
            if (o >= 0 && o < len) tin[s][k] = '{v: 1'b1, d: ACC_W'(st[o][ix])};
          end
        end
      end
      @(posedge clk);
      #1;
      if (df != DF_OS) begin
        for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
          e = edge_map(cfg, P, s, k);
          if (tout[s][k].v &&
              ((sh == SH_WIDE && e.kind == EK_CROSS) || (sh == SH_TALL && e.kind == EK_RING) ||
               (sh == SH_SQUARE && e.kind == EK_SQOUT))) begin
            q[s][k].push_back(int'(tout[s][k].d));
            last_out = t;
          end
        end
      end
      @(negedge clk);
    end
    // drain (OS)
    if (df == DF_OS) begin
      clear_inputs();
      phase = PH_DRAIN;
      phase_start = 1'b1;
      for (int t = 0; t < depth + 2; t++) begin
        @(posedge clk);
        #1;
        phase_start = 1'b0;
        for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
          e = edge_map(cfg, P, s, k);
          if (e.kind == EK_CROSS && tout[s][k].v) q[s][k].push_back(int'(tout[s][k].d));
        end
        @(negedge clk);
      end
    end
    phase = PH_IDLE;
    // compare with the reference product
    for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
      int ix;
      e  = edge_map(cfg, P, s, k);
      ix = int'(e.index);
      if (df == DF_OS && e.kind == EK_CROSS) begin
        check($sformatf("OS size side%0d idx%0d", s, k), q[s][k].size(), depth);
        for (int d = 0; d < depth && d < q[s][k].size(); d++) begin
          int exp = 0;
          for (int kk = 0; kk < len; kk++) exp += rm[d][kk] * xm[ix][kk];
          check($sformatf("OS shape%0d rl%0d pos%0d lane%0d", sh, rl, ix, d), q[s][k][d], exp);
        end
      end
      if (df != DF_OS && ((sh == SH_WIDE && e.kind == EK_CROSS) || (sh == SH_TALL && e.kind == EK_RING) ||
                          (sh == SH_SQUARE && e.kind == EK_SQOUT))) begin
        check($sformatf("S size side%0d idx%0d", s, k), q[s][k].size(), len);
        for (int m = 0; m < len && m < q[s][k].size(); m++) begin
          int exp = 0;
          if (sh == SH_TALL) for (int c = 0; c < npos; c++) exp += st[m][c] * sm[ix][c];
          else               for (int r = 0; r < depth; r++) exp += st[m][r] * sm[r][ix];
          check($sformatf("df%0d shape%0d rl%0d out%0d m%0d", df, sh, rl, ix, m), q[s][k][m], exp);
        end
      end
    end
    // latency against the paper's model (stationary dataflows)
    if (df != DF_OS) begin
      rdim = (sh == SH_TALL) ? npos : depth;
      cdim = (sh == SH_TALL) ? depth : npos;
      bound = (rdim + cdim + len - 1) + ((sh == SH_SQUARE) ? 0 : 4 * ((rdim < cdim) ? rdim : cdim));
      checks++;
      if (last_out + 1 > bound) begin
        failures++;
        $display("FAIL latency df%0d shape%0d rl%0d: last output after %0d cycles, model %0d", df, sh, rl, last_out + 1, bound);
      end else
        $display("latency df%0d shape%0d rl%0d: %0d cycles (model %0d)", df, sh, rl, last_out + 1, bound);
    end
  endtask

  initial begin
    cfg_load = 1'b0; phase_start = 1'b0; clear = 1'b0; phase = PH_IDLE;
    cfg = '0;
    clear_inputs();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int d = 0; d < 3; d++) begin
      run_case(dataflow_e'(d), SH_SQUARE, 0, 7);
      for (int r = 1; r <= P / 2; r++) begin
        run_case(dataflow_e'(d), SH_WIDE, r, 9);
        run_case(dataflow_e'(d), SH_TALL, r, 5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
