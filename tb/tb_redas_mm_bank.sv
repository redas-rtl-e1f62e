// tb_redas_mm_bank -- one complete bank (memory, accumulator, controller).
// The bank is north column 0 of an 8x8 array. It is filled through the
// side port, then:
//   * an OS wide tile makes it the cross issuer of position 0: the words it
//     sends to the array must be its non-stationary region in order,
//     starting one cycle after pt = 0;
//   * a WS tall tile (north side = ring of the tall shape, lane 0) makes it
//     an output receiver: a stream of partial sums sent back on arr_in is
//     written to the output region, and a second tile with acc_en adds a
//     second stream onto it;
// and the results are read back through the side port.
module tb_redas_mm_bank;
  import redas_pkg::*;
  localparam int P = 8;
  localparam int PTW = LEN_W + RL_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic gemm_load, gemm_busy, side_req, side_we, side_gnt, side_rvalid, sleeping;
  gemm_t gemm;
  phase_e phase;
  logic [PTW-1:0] pt;
  link_t arr_out, arr_in;
  logic [ADDR_W-1:0] side_addr;
  logic [ACC_W-1:0] side_wdata, side_rdata;
  bank_role_e role;
  int checks = 0, failures = 0;

  redas_mm_bank #(.P(P), .DEPTH(256)) dut (
    .clk, .rst_n, .side(2'd0), .idx(16'd0), .gemm_load, .gemm, .gemm_busy, .phase, .pt, .arr_out, .arr_in,
    .side_req, .side_we, .side_addr, .side_wdata, .side_gnt, .side_rvalid, .side_rdata, .role, .sleeping);

  initial begin : watchdog
    #(5_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic side_write(int a, int d);
    @(negedge clk);
    side_req = 1; side_we = 1; side_addr = ADDR_W'(a); side_wdata = ACC_W'(d);
    #1; while (!side_gnt) begin @(negedge clk); #1; end
    @(negedge clk); side_req = 0;
  endtask

  task automatic side_read(int a, output int d);
    @(negedge clk);
    side_req = 1; side_we = 0; side_addr = ADDR_W'(a);
    #1; while (!side_gnt) begin @(negedge clk); #1; end
    @(negedge clk); side_req = 0;
    d = int'(side_rdata);
  endtask

  task automatic load_gemm(gemm_t g);
    @(negedge clk); gemm = g; gemm_load = 1; gemm_busy = 1;
    @(negedge clk); gemm_load = 0;
  endtask

  int nonv [16], outv [16], s1 [16], s2 [16];

  initial begin
    gemm_t g;
    int got [$];
    int d;
    gemm_load = 0; gemm_busy = 0; side_req = 0; side_we = 0; side_addr = 0; side_wdata = 0;
    gemm = '0; phase = PH_IDLE; pt = '0; arr_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 16; k++) begin nonv[k] = $urandom_range(0, 200) - 100; side_write(64 + k, nonv[k]); end
    // OS wide rl=2: cross issuer of position 0
    g = '0; g.df = DF_OS; g.shape = SH_WIDE; g.rl = 2; g.len = 10; g.non_base = 64; g.out_base = 128;
    load_gemm(g);
    chk("role", int'(role), int'(BR_WEIGHT_ISSUER));
    phase = PH_COMPUTE;
    for (int t = 0; t < 14; t++) begin
      pt = PTW'(t);
      @(posedge clk); #1;
      if (arr_out.v) got.push_back(int'(arr_out.d));
      if (t == 0) chk("first word one cycle after pt 0", int'(arr_out.v), 1);
      @(negedge clk);
    end
    phase = PH_IDLE; gemm_busy = 0;
    chk("issued words", got.size(), 10);
    for (int k = 0; k < 10 && k < got.size(); k++) chk($sformatf("issued word %0d", k), got[k], nonv[k]);
    // WS tall rl=1: north column 0 receives lane 0's outputs
    for (int acc = 0; acc < 2; acc++) begin
      g = '0; g.df = DF_WS; g.shape = SH_TALL; g.rl = 1; g.len = 12; g.out_base = 128; g.acc_en = acc[0];
      load_gemm(g);
      chk("receiver role", int'(role == BR_OUTPUT_RECEIVER || role == BR_MIXED), 1);
      phase = PH_COMPUTE;
      for (int t = 0; t < 30; t++) begin
        pt = PTW'(t);
        arr_in = '0;
        if (t >= 5 && t < 17) begin
          int v;
          v = $urandom_range(0, 2000) - 1000;
          if (acc == 0) s1[t-5] = v; else s2[t-5] = v;
          arr_in = '{v: 1'b1, d: ACC_W'(v)};
        end
        @(negedge clk);
      end
      arr_in = '0; phase = PH_IDLE;
      repeat (4) @(negedge clk);
      gemm_busy = 0;
    end
    for (int k = 0; k < 12; k++) begin
      side_read(128 + k, d);
      chk($sformatf("accumulated word %0d", k), d, s1[k] + s2[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
