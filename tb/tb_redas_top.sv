// tb_redas_top -- end-to-end test of the accelerator.
//
// An 8x8 instance (banks of 256 words, 8 DMA channels) runs a program of
// instructions as the mapper would emit it, with all data moving through
// the DMA from a behavioural DRAM:
//   for each GEMM tile: DMA-load every bank's image (stationary, streamed
//   and, for accumulation, an initial output region) -> barrier -> GEMM -> barrier ->
//   DMA-store every receiving bank's output region -> barrier.
// The tiles change dataflow and shape from one to the next (OS wide, WS
// tall, IS square, WS wide with accumulation, OS tall), so the array is
// reshaped and the dataflow switched between tiles. A SIMD RELU over one
// side's output region, and a SIMD COPY plus a DMA load that are issued
// while a GEMM holds the banks, exercise SIMD, bank-port stalls and the
// SIMD-over-DMA priority. Results stored back to DRAM are compared with
// products computed here. At the end each mechanism must have happened at
// least once: reshape, dataflow switch, dispatch stall, SIMD stall, DMA
// stall, DRAM back pressure, accumulation, bank sleep, SIMD, and DMA in
// both directions.
module tb_redas_top;
  import redas_pkg::*;

  localparam int P     = 8;
  localparam int DEPTH = 256;
  localparam int NCH   = 8;
  localparam int STA   = 0, NON = 48, OUT = 112, AUX = 176;
  localparam int MAXL  = 12;
  localparam int MAXP  = 4 * P;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    ib_push, ib_full, lut_we;
  instr_t                  ib_din;
  logic [$clog2(LUT_SEG)-1:0] lut_idx;
  logic signed [ACC_W-1:0] lut_bp, lut_icpt;
  logic signed [15:0]      lut_slope;
  logic [NCH-1:0]          dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [DRAM_AW-1:0]      dram_addr [NCH];
  logic [ACC_W-1:0]        dram_wdata [NCH], dram_rdata [NCH];
  logic                    idle;
  logic [15:0]             n_gemm, n_df_switch, n_reshape, n_stall;
  logic [3:0]              simd_stall;
  logic [NCH-1:0]          dma_stall;
  logic [4*P-1:0]          bank_sleep;
  int                      n_refused;

  redas_top #(.P(P), .DEPTH(DEPTH), .NCH(NCH), .IB_DEPTH(16)) dut (
    .clk, .rst_n, .ib_push, .ib_din, .ib_full,
    .lut_we, .lut_idx, .lut_bp, .lut_slope, .lut_icpt,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .idle, .n_gemm, .n_df_switch, .n_reshape, .n_stall, .simd_stall, .dma_stall, .bank_sleep
  );

  redas_dram_model #(.NCH(NCH)) u_dram (
    .clk, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata), .n_refused
  );

  int checks = 0, failures = 0;
  initial begin : watchdog
    #(50_000_000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int c_simd_stall = 0, c_dma_stall = 0, c_sleep = 0, c_dma_ld = 0, c_dma_st = 0, c_simd = 0;
  always @(posedge clk) if (rst_n) begin
    if (|simd_stall) c_simd_stall++;
    if (|dma_stall)  c_dma_stall++;
    if (|bank_sleep) c_sleep++;
    for (int c = 0; c < NCH; c++) if (dram_req[c] && dram_gnt[c]) begin
      if (dram_we[c]) c_dma_st++; else c_dma_ld++;
    end
  end
  int c_acc = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic push(instr_t i);
    @(negedge clk);
    while (ib_full) @(negedge clk);
    ib_din  = i;
    ib_push = 1'b1;
    @(negedge clk);
    ib_push = 1'b0;
  endtask

  function automatic instr_t i_dma(logic store, int bank, int daddr, int baddr, int len);
    instr_t i = '0;
    i.op = OP_DMA;
    i.dma = '{store: store, bank: 16'(bank), dram_addr: DRAM_AW'(daddr), bank_addr: ADDR_W'(baddr), len: (ADDR_W+1)'(len)};
    return i;
  endfunction

  function automatic instr_t i_nop();
    instr_t i = '0;
    i.op = OP_NOP;
    return i;
  endfunction

  function automatic int rnd8();
    return int'($urandom_range(0, 30)) - 15;
  endfunction

  // DRAM layout: bank g image at g*256, results at 16384 + g*256
  localparam int RES = 16384;

  int rm [MAXP][MAXL], xm [MAXP][MAXL], sm [MAXP][MAXP], st [MAXL][MAXP];
  int init [4][P][MAXP];

  task automatic wait_idle();
    repeat (3) @(negedge clk);
    while (!idle) @(negedge clk);
  endtask

  task automatic run_tile(dataflow_e df, shape_e sh, int rl_in, int len, logic acc, logic concurrent);
    arr_cfg_t cfg;
    gemm_t g;
    instr_t i;
    edge_info_t e;
    int rl, depth, npos, nout [4][P];
    cfg = '{df: df, shape: sh, rl: RL_W'(rl_in)};
    rl = rl_eff(cfg, P);
    depth = cross_depth(cfg, P);
    npos = (sh == SH_SQUARE) ? P : 4 * (P - rl);
    for (int a = 0; a < MAXP; a++) for (int b = 0; b < MAXL; b++) begin rm[a][b] = rnd8(); xm[a][b] = rnd8(); end
    for (int a = 0; a < MAXP; a++) for (int b = 0; b < MAXP; b++) sm[a][b] = rnd8();
    for (int a = 0; a < MAXL; a++) for (int b = 0; b < MAXP; b++) st[a][b] = rnd8();
    // bank images in DRAM
    for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
      int gb = s * P + k, base = gb * 256, ix;
      e = edge_map(cfg, P, s, k);
      ix = int'(e.index);
      nout[s][k] = 0;
      for (int a = 0; a < 64 + 64; a++) u_dram.mem[base + a] = '0;
      for (int m = 0; m < MAXP; m++) begin
        init[s][k][m] = acc ? rnd8() * 100 : 0;
        u_dram.mem[base + OUT + m] = ACC_W'(init[s][k][m]);
      end
      if (df == DF_OS) begin
        if (e.kind == EK_RING)  for (int t = 0; t < len; t++) u_dram.mem[base + NON + t] = ACC_W'(rm[ix][t]);
        if (e.kind == EK_CROSS) begin
          for (int t = 0; t < len; t++) u_dram.mem[base + NON + t] = ACC_W'(xm[ix][t]);
          nout[s][k] = depth;
        end
      end else begin
        if (e.kind == EK_CROSS) for (int d = 0; d < depth; d++) u_dram.mem[base + STA + d] = ACC_W'(sm[d][ix]);
        if ((sh == SH_WIDE && e.kind == EK_RING) || (sh == SH_TALL && e.kind == EK_CROSS) ||
            (sh == SH_SQUARE && e.kind == EK_RING))
          for (int m = 0; m < len; m++) u_dram.mem[base + NON + m] = ACC_W'(st[m][ix]);
        if ((sh == SH_WIDE && e.kind == EK_CROSS) || (sh == SH_TALL && e.kind == EK_RING) ||
            (sh == SH_SQUARE && e.kind == EK_SQOUT))
          nout[s][k] = len;
      end
    end
    // program: load every bank, then the GEMM
    for (int gb = 0; gb < 4 * P; gb++) push(i_dma(1'b0, gb, gb * 256, 0, OUT + MAXP));
    g = '{df: df, shape: sh, rl: RL_W'(rl_in), len: LEN_W'(len), sta_base: ADDR_W'(STA),
          non_base: ADDR_W'(NON), out_base: ADDR_W'(OUT), acc_en: acc};
    i = '0; i.op = OP_GEMM; i.gemm = g;
    push(i_nop());
    push(i);
    if (acc) c_acc++;
    if (concurrent) begin
      // work that competes with the array for the banks
      i = '0; i.op = OP_SIMD;
      i.simd = '{op: SO_COPY, side: 2'd3, src: ADDR_W'(NON), dst: ADDR_W'(AUX), len: (ADDR_W+1)'(4)};
      push(i);
      push(i_dma(1'b0, 3 * P + 1, 3 * 256, AUX + 8, 16));
      push(i_dma(1'b0, 0, 0, AUX + 8, 16));
    end
    push(i_nop());
    for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++)
      if (nout[s][k] > 0) push(i_dma(1'b1, s * P + k, RES + (s * P + k) * 256, OUT, nout[s][k]));
    push(i_nop());
    wait_idle();
    // compare
    for (int s = 0; s < 4; s++) for (int k = 0; k < P; k++) begin
      int ix, gb = s * P + k;
      e = edge_map(cfg, P, s, k);
      ix = int'(e.index);
      for (int n = 0; n < nout[s][k]; n++) begin
        int exp = init[s][k][n], got;
        if (df == DF_OS) for (int kk = 0; kk < len; kk++) exp += rm[n][kk] * xm[ix][kk];
        else if (sh == SH_TALL) for (int c = 0; c < npos; c++) exp += st[n][c] * sm[ix][c];
        else for (int r = 0; r < depth; r++) exp += st[n][r] * sm[r][ix];
        got = int'(u_dram.mem[RES + gb * 256 + n]);
        check($sformatf("df%0d sh%0d rl%0d bank%0d n%0d", df, sh, rl, gb, n), got, exp);
      end
    end
  endtask

  initial begin
    instr_t i;
    ib_push = 1'b0; ib_din = '0; lut_we = 1'b0; lut_idx = '0; lut_bp = '0; lut_slope = '0; lut_icpt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (40) @(negedge clk);   // long enough for idle banks to fall asleep
    run_tile(DF_OS, SH_WIDE,   2, 9, 1'b0, 1'b1);
    // SIMD RELU over the north side's outputs, then store and check
    i = '0; i.op = OP_SIMD;
    i.simd = '{op: SO_RELU, side: 2'd0, src: ADDR_W'(OUT), dst: ADDR_W'(AUX), len: (ADDR_W+1)'(2)};
    push(i);
    push(i_nop());
    for (int k = 0; k < P; k++) push(i_dma(1'b1, k, RES + 200 * 256 + k * 4, AUX, 2));
    push(i_nop());
    wait_idle();
    c_simd++;
    for (int k = 0; k < P; k++) for (int n = 0; n < 2; n++) begin
      int v;
      v = int'(u_dram.mem[RES + k * 256 + n]);
      check($sformatf("relu bank%0d n%0d", k, n), int'(u_dram.mem[RES + 200 * 256 + k * 4 + n]), (v < 0) ? 0 : v);
    end
    run_tile(DF_WS, SH_TALL,   3, 5, 1'b0, 1'b0);
    run_tile(DF_IS, SH_SQUARE, 0, 7, 1'b0, 1'b1);
    run_tile(DF_WS, SH_WIDE,   1, 6, 1'b1, 1'b0);
    run_tile(DF_OS, SH_TALL,   2, 6, 1'b0, 1'b0);
    // mechanisms
    check("gemms", int'(n_gemm), 5);
    check("reshape happened",          int'(n_reshape > 0), 1);
    check("dataflow switch happened",  int'(n_df_switch > 0), 1);
    check("dispatch stall happened",   int'(n_stall > 0), 1);
    check("SIMD stall happened",       int'(c_simd_stall > 0), 1);
    check("DMA stall happened",        int'(c_dma_stall > 0), 1);
    check("DRAM back pressure",        int'(n_refused > 0), 1);
    check("bank sleep happened",       int'(c_sleep > 0), 1);
    check("accumulating tile ran",     int'(c_acc > 0), 1);
    check("SIMD ran",                  int'(c_simd > 0), 1);
    check("DMA loads",                 int'(c_dma_ld > 0), 1);
    check("DMA stores",                int'(c_dma_st > 0), 1);
    $display("mechanisms: gemm=%0d reshape=%0d df_switch=%0d dispatch_stall=%0d simd_stall=%0d dma_stall=%0d dram_refused=%0d sleep=%0d acc=%0d simd=%0d dma_ld=%0d dma_st=%0d",
             n_gemm, n_reshape, n_df_switch, n_stall, c_simd_stall, c_dma_stall, n_refused, c_sleep, c_acc, c_simd, c_dma_ld, c_dma_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
