// tb_redas_controller -- random programs of GEMM, SIMD, DMA and barrier
// instructions against stand-in SIMD units and DMA channels that stay busy
// for a random time. Checks: each GEMM's phase sequence and lengths
// (CONFIG P+1, PRELOAD depth for WS/IS, CLEAR 1, COMPUTE compute_cycles,
// DRAIN depth+2 for OS, TAIL 4), the array-side copies one cycle later,
// the drain start pulse, that SIMD/DMA go to the right unit and never to a
// busy one, that a barrier waits for every unit, and the counters of
// GEMMs, dataflow switches and reshapes.
module tb_redas_controller;
  import redas_pkg::*;
  localparam int P = 8, NCH = 4;
  localparam int PTW = LEN_W + RL_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ib_valid, ib_pop, gemm_load, gemm_busy, arr_cfg_load, arr_phase_start, arr_clear, idle;
  instr_t ib_head;
  gemm_t gemm;
  phase_e phase, arr_phase;
  logic [PTW-1:0] pt;
  arr_cfg_t arr_cfg;
  logic [3:0] simd_start, simd_busy;
  simd_t simd_cmd;
  logic [NCH-1:0] dma_start, dma_busy;
  dma_desc_t dma_desc;
  logic [15:0] n_gemm, n_df_switch, n_reshape, n_stall;
  int checks = 0, failures = 0;

  redas_controller #(.P(P), .NCH(NCH)) dut (.clk, .rst_n, .ib_valid, .ib_head, .ib_pop,
    .gemm_load, .gemm, .gemm_busy, .phase, .pt, .arr_cfg_load, .arr_cfg, .arr_phase, .arr_phase_start,
    .arr_clear, .simd_start, .simd_cmd, .simd_busy, .dma_start, .dma_desc, .dma_busy,
    .idle, .n_gemm, .n_df_switch, .n_reshape, .n_stall);

  initial begin : watchdog
    #(20_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // instruction queue standing in for the instruction buffer
  instr_t prog [$];
  assign ib_valid = prog.size() > 0;
  assign ib_head  = (prog.size() > 0) ? prog[0] : '0;

  // busy units
  int sb [4], db [NCH];
  logic pop_d = 1'b0;
  always @(posedge clk) pop_d <= ib_pop;
  always @(negedge clk) if (pop_d) void'(prog.pop_front());
  always @(posedge clk) begin
    for (int s = 0; s < 4; s++) begin
      if (simd_start[s]) begin
        chk("simd started while busy", int'(simd_busy[s]), 0);
        chk("simd side", int'(simd_cmd.side), s);
        sb[s] <= $urandom_range(1, 40);
      end else if (sb[s] > 0) sb[s] <= sb[s] - 1;
    end
    for (int c = 0; c < NCH; c++) begin
      if (dma_start[c]) begin
        chk("dma started while busy", int'(dma_busy[c]), 0);
        chk("dma channel", int'(dma_desc.bank) % NCH, c);
        db[c] <= $urandom_range(1, 60);
      end else if (db[c] > 0) db[c] <= db[c] - 1;
    end
  end
  always_comb begin
    for (int s = 0; s < 4; s++) simd_busy[s] = sb[s] > 0;
    for (int c = 0; c < NCH; c++) dma_busy[c] = db[c] > 0;
  end

  // phase sequence checker
  phase_e prev_arr_phase;
  phase_e ph_d;
  int run_len;
  phase_e run_ph;
  gemm_t cur;
  int exp_gemm = 0, exp_sw = 0, exp_rs = 0, have_prev = 0;
  arr_cfg_t prevc;
  always @(negedge clk) if (rst_n) begin
    chk("array phase lags by one", int'(arr_phase), int'(ph_d));
    ph_d = phase;
    if (int'(n_gemm) != exp_gemm) begin
      arr_cfg_t c;
      cur = dut.g_q;
      c = '{df: cur.df, shape: cur.shape, rl: cur.rl};
      exp_gemm++;
      if (have_prev && prevc.df != c.df) exp_sw++;
      if (have_prev && (prevc.shape != c.shape || (c.shape != SH_SQUARE && prevc.rl != c.rl))) exp_rs++;
      have_prev = 1; prevc = c;
    end
    if (phase == run_ph) run_len++;
    else begin
      arr_cfg_t c;
      c = '{df: cur.df, shape: cur.shape, rl: cur.rl};
      if (run_ph == PH_PRELOAD) chk("preload length", run_len, cross_depth(c, P));
      if (run_ph == PH_COMPUTE) chk("compute length", run_len, compute_cycles(c, P, int'(cur.len)));
      if (run_ph == PH_DRAIN)   chk("drain length", run_len, cross_depth(c, P) + 2);
      if (phase == PH_PRELOAD) chk("preload only for WS/IS", int'(cur.df != DF_OS), 1);
      if (phase == PH_DRAIN)   chk("drain only for OS", int'(cur.df == DF_OS), 1);
      run_ph = phase; run_len = 1;
    end
    if (arr_phase_start) chk("drain start on first drain cycle", int'(arr_phase), int'(PH_DRAIN));
  end

  // barrier check
  always @(negedge clk) if (rst_n && ib_pop && ib_head.op == OP_NOP)
    chk("barrier waits for all units", int'(!gemm_busy && simd_busy == 0 && dma_busy == 0), 1);

  // config length: gemm_load to first non-idle phase or compute
  int t_load = -1, cyc = 0, seen_gemm = 0;
  always @(negedge clk) begin
    cyc++;
    if (int'(n_gemm) != seen_gemm) begin t_load = cyc; seen_gemm = int'(n_gemm); end
    if (t_load >= 0 && (phase == PH_PRELOAD || (phase == PH_COMPUTE && dut.g_q.df == DF_OS))) begin
      chk("config + clear length", cyc - t_load, (dut.g_q.df == DF_OS) ? P + 2 : P + 1);
      t_load = -1;
    end
  end

  initial begin
    instr_t i;
    for (int s = 0; s < 4; s++) sb[s] = 0;
    for (int c = 0; c < NCH; c++) db[c] = 0;
    run_ph = PH_IDLE; run_len = 0; cur = '0; ph_d = PH_IDLE;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      i = '0;
      i.op = opcode_e'($urandom_range(0, 3));
      i.gemm.df = dataflow_e'($urandom_range(0, 2));
      i.gemm.shape = shape_e'($urandom_range(0, 2));
      i.gemm.rl = RL_W'($urandom_range(1, P / 2));
      i.gemm.len = LEN_W'($urandom_range(1, 20));
      i.simd.side = 2'($urandom_range(0, 3));
      i.dma.bank = 16'($urandom_range(0, 4 * P - 1));
      prog.push_back(i);
    end
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);
    chk("gemm count", int'(n_gemm), exp_gemm);
    chk("switch count", int'(n_df_switch), exp_sw);
    chk("reshape count", int'(n_reshape), exp_rs);
    chk("stalls seen", int'(n_stall > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
