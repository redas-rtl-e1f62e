// tb_redas_bank_ctrl -- two bank controllers of an 8x8 array (west row 1
// and north column 2) are taken through random GEMM tiles of every
// dataflow and shape. The expected issue cycles and addresses are worked
// out here from the edge roles (edge_map) and the skew rules, not from
// bank_plan; receive addresses, accumulate flag, side-port arbitration
// (stall while the array uses the port) and sleep/wake are checked too.
module tb_redas_bank_ctrl;
  import redas_pkg::*;
  localparam int P = 8;
  localparam int PTW = LEN_W + RL_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic gemm_load, gemm_busy, arr_in_v, side_req, side_we;
  gemm_t gemm;
  phase_e phase;
  logic [PTW-1:0] pt;
  logic [ADDR_W-1:0] side_addr;
  logic [ACC_W-1:0] side_wdata;
  int checks = 0, failures = 0, nstall = 0, nsleep = 0;

  logic side_gnt [2], side_rvalid [2], acc_in_v [2], acc_en [2], mem_sleep [2], mem_re [2], mem_we [2], issue_v [2], sleeping [2];
  logic [ADDR_W-1:0] acc_in_addr [2], mem_raddr [2], mem_waddr [2];
  logic [ACC_W-1:0] mem_wdata [2];
  bank_role_e role [2];

  localparam int SIDES [2] = '{3, 0};
  localparam int IDXS  [2] = '{1, 2};
  for (genvar b = 0; b < 2; b++) begin : g_b
    redas_bank_ctrl #(.P(P)) dut (
      .clk, .rst_n, .side(2'(SIDES[b])), .idx(16'(IDXS[b])), .gemm_load, .gemm, .gemm_busy, .phase, .pt, .arr_in_v,
      .side_req, .side_we, .side_addr, .side_wdata, .side_gnt(side_gnt[b]), .side_rvalid(side_rvalid[b]),
      .acc_in_v(acc_in_v[b]), .acc_in_addr(acc_in_addr[b]), .acc_en(acc_en[b]),
      .acc_rd_req(1'b0), .acc_rd_addr('0), .acc_wr_en(1'b0), .acc_wr_addr('0), .acc_wr_data('0),
      .mem_sleep(mem_sleep[b]), .mem_re(mem_re[b]), .mem_raddr(mem_raddr[b]), .mem_we(mem_we[b]),
      .mem_waddr(mem_waddr[b]), .mem_wdata(mem_wdata[b]), .issue_v(issue_v[b]), .role(role[b]), .sleeping(sleeping[b])
    );
  end

  initial begin : watchdog
    #(5_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // expected issue start and address of bank b in phase ph, -1 = none
  function automatic int exp_off(gemm_t g, int b, phase_e ph, output int base, output int len);
    arr_cfg_t c = '{df: g.df, shape: g.shape, rl: g.rl};
    edge_info_t e = edge_map(c, P, SIDES[b], IDXS[b]);
    int ix = int'(e.index), rl = rl_eff(c, P);
    base = int'(g.non_base); len = int'(g.len);
    if (ph == PH_PRELOAD) begin
      if (g.df != DF_OS && e.kind == EK_CROSS) begin base = int'(g.sta_base); len = cross_depth(c, P); return 0; end
      return -1;
    end
    if (ph != PH_COMPUTE) return -1;
    if (g.df == DF_OS) begin
      if (e.kind == EK_RING) return ix;
      if (e.kind == EK_CROSS) return ix + ring_extra(c, P, ix);
      return -1;
    end
    if (g.shape == SH_WIDE && e.kind == EK_RING) return rl - 1 - ix;
    if (g.shape == SH_TALL && e.kind == EK_CROSS) return ix + ring_extra(c, P, ix);
    if (g.shape == SH_SQUARE && e.kind == EK_RING) return ix;
    return -1;
  endfunction

  function automatic logic exp_recv(gemm_t g, int b, phase_e ph);
    arr_cfg_t c = '{df: g.df, shape: g.shape, rl: g.rl};
    edge_info_t e = edge_map(c, P, SIDES[b], IDXS[b]);
    if (g.df == DF_OS) return ph == PH_DRAIN && e.kind == EK_CROSS;
    if (ph != PH_COMPUTE) return 1'b0;
    return (g.shape == SH_WIDE && e.kind == EK_CROSS) || (g.shape == SH_TALL && e.kind == EK_RING) ||
           (g.shape == SH_SQUARE && e.kind == EK_SQOUT);
  endfunction

  initial begin
    gemm_t g;
    phase_e seq [3];
    gemm_load = 0; gemm_busy = 0; arr_in_v = 0; side_req = 0; side_we = 0; side_addr = 0; side_wdata = 0;
    gemm = '0; phase = PH_IDLE; pt = '0;
    seq = '{PH_PRELOAD, PH_COMPUTE, PH_DRAIN};
    repeat (2) @(negedge clk); rst_n = 1;
    // sleep after idling, wake on a side request
    repeat (30) @(negedge clk);
    chk("asleep", int'(sleeping[0]), 1);
    side_req = 1; side_we = 1;
    #1;
    chk("no grant while waking", int'(side_gnt[0]), 0);
    @(negedge clk);
    chk("grant after wake", int'(side_gnt[0]), 1);
    side_req = 0;
    for (int r = 0; r < 40; r++) begin
      g = '0;
      g.df = dataflow_e'($urandom_range(0, 2));
      g.shape = shape_e'($urandom_range(0, 2));
      g.rl = RL_W'($urandom_range(1, P / 2));
      g.len = LEN_W'($urandom_range(1, 12));
      g.sta_base = ADDR_W'($urandom_range(0, 100));
      g.non_base = ADDR_W'($urandom_range(200, 300));
      g.out_base = ADDR_W'($urandom_range(400, 500));
      g.acc_en = $urandom_range(0, 1);
      @(negedge clk);
      gemm = g; gemm_load = 1; gemm_busy = 1;
      @(negedge clk);
      gemm_load = 0;
      for (int q = 0; q < 3; q++) begin
        int rcnt [2];
        rcnt = '{0, 0};
        phase = seq[q];
        for (int t = 0; t < 60; t++) begin
          pt = PTW'(t);
          side_req = $urandom_range(0, 1); side_we = $urandom_range(0, 1);
          side_addr = ADDR_W'($urandom_range(600, 700));
          #1;
          for (int b = 0; b < 2; b++) begin
            int base, len, off, ei;
            off = exp_off(g, b, phase, base, len);
            ei = (off >= 0 && t >= off && t < off + len);
            chk($sformatf("issue b%0d r%0d ph%0d t%0d", b, r, phase, t), int'(mem_re[b] && mem_raddr[b] < 600), ei);
            if (ei) chk("issue addr", int'(mem_raddr[b]),
                        (phase == PH_PRELOAD) ? base + len - 1 - (t - off) : base + (t - off));
            if (ei && side_req && !side_we) begin chk("side read refused", int'(side_gnt[b]), 0); nstall++; end
          end
          @(negedge clk);
        end
        // receive: outputs are accepted for two cycles after the phase ends
        // (the receive side sees the phase two cycles late), not later
        for (int t = 0; t < 6; t++) begin
          phase = PH_IDLE;
          arr_in_v = (t < 4);
          #1;
          for (int b = 0; b < 2; b++) begin
            if (t < 4) begin
              automatic logic er = exp_recv(g, b, seq[q]) && t < 2;
              chk($sformatf("recv b%0d r%0d ph%0d", b, r, seq[q]), int'(acc_in_v[b]), int'(er));
              if (er) begin
                chk("recv addr", int'(acc_in_addr[b]), int'(g.out_base) + rcnt[b]);
                chk("recv acc", int'(acc_en[b]), int'(seq[q] == PH_COMPUTE && g.acc_en));
                rcnt[b]++;
              end
            end
          end
          @(negedge clk);
        end
        arr_in_v = 0;
      end
      side_req = 0; gemm_busy = 0;
    end
    chk("stall seen", int'(nstall > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
