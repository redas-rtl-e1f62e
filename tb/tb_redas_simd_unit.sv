// tb_redas_simd_unit -- runs COPY, RELU and PWL commands on a 4-lane unit
// against per-lane memory models whose side ports grant at random (so the
// lock-step stall path is exercised), and checks every written word.
module tb_redas_simd_unit;
  import redas_pkg::*;
  localparam int P = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, busy, lut_we, req, we, stall;
  simd_t cmd;
  logic [$clog2(LUT_SEG)-1:0] lut_idx;
  logic signed [ACC_W-1:0] lut_bp, lut_icpt;
  logic signed [15:0] lut_slope;
  logic [ADDR_W-1:0] addr;
  logic [ACC_W-1:0] wdata [P], rdata [P];
  logic [P-1:0] gnt, rvalid;
  logic [ACC_W-1:0] mem [P][64];
  int checks = 0, failures = 0, nstall = 0;
  int bp [LUT_SEG], sl [LUT_SEG], ic [LUT_SEG];

  redas_simd_unit #(.P(P)) dut (.clk, .rst_n, .start, .cmd, .busy, .lut_we, .lut_idx, .lut_bp,
    .lut_slope, .lut_icpt, .req, .we, .addr, .wdata, .gnt, .rvalid, .rdata, .stall);

  always @(negedge clk) for (int l = 0; l < P; l++) gnt[l] = req && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (stall) nstall++;
    for (int l = 0; l < P; l++) begin
      rvalid[l] <= gnt[l] && !we;
      if (gnt[l] && !we) rdata[l] <= mem[l][addr[5:0]];
      if (gnt[l] && we)  mem[l][addr[5:0]] <= wdata[l];
    end
  end

  initial begin : watchdog
    #(5_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ref_op(simd_op_e op, int x);
    int seg = 0;
    longint pr;
    if (op == SO_RELU) return (x < 0) ? 0 : x;
    if (op == SO_COPY) return x;
    for (int s = 1; s < LUT_SEG; s++) if (x >= bp[s]) seg = s;
    pr = longint'(x) * longint'(sl[seg]);
    return int'(pr >>> SLOPE_FRAC) + ic[seg];
  endfunction

  initial begin
    start = 0; cmd = '0; lut_we = 0; lut_idx = 0; lut_bp = 0; lut_slope = 0; lut_icpt = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // a sigmoid-like table
    for (int s = 0; s < LUT_SEG; s++) begin
      bp[s] = (s - 8) * 64; sl[s] = $urandom_range(0, 300) - 100; ic[s] = $urandom_range(0, 2000) - 1000;
      @(negedge clk); lut_we = 1; lut_idx = 4'(s); lut_bp = bp[s]; lut_slope = 16'(sl[s]); lut_icpt = ic[s];
    end
    @(negedge clk); lut_we = 0;
    for (int r = 0; r < 12; r++) begin
      automatic simd_op_e op = simd_op_e'(r % 3);
      automatic int src = $urandom_range(0, 15), dst = 32 + $urandom_range(0, 15), len = $urandom_range(1, 16);
      automatic int exp [P][16];
      for (int l = 0; l < P; l++) for (int a = 0; a < 64; a++) mem[l][a] = $urandom_range(0, 1200) - 600;
      for (int l = 0; l < P; l++) for (int k = 0; k < len; k++) exp[l][k] = ref_op(op, int'(mem[l][src + k]));
      @(negedge clk);
      cmd = '{op: op, side: 2'd0, src: ADDR_W'(src), dst: ADDR_W'(dst), len: (ADDR_W+1)'(len)};
      start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      for (int l = 0; l < P; l++) for (int k = 0; k < len; k++) begin
        checks++;
        if (int'(mem[l][dst + k]) !== exp[l][k]) begin
          failures++;
          if (failures < 10) $display("FAIL op%0d lane%0d k%0d got %0d exp %0d", op, l, k, int'(mem[l][dst + k]), exp[l][k]);
        end
      end
    end
    checks++; if (nstall == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
