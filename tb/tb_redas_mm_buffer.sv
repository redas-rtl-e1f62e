// tb_redas_mm_buffer -- the four banks of one side under random SIMD and
// DMA traffic (no GEMM running). Checks: the SIMD unit wins a bank over
// the DMA, a grant is only given to a requester, writes land in the right
// bank, read data come back one cycle later tagged for the requester that
// was granted, and every bank also gets DMA grants when the SIMD is quiet.
module tb_redas_mm_buffer;
  import redas_pkg::*;
  localparam int P = 4;
  localparam int PTW = LEN_W + RL_W + 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  link_t arr_out [P], arr_in [P];
  logic simd_req, simd_we;
  logic [ADDR_W-1:0] simd_addr;
  logic [ACC_W-1:0] simd_wdata [P], dma_wdata [P], rdata [P];
  logic [ADDR_W-1:0] dma_addr [P];
  logic [P-1:0] simd_gnt, simd_rvalid, dma_req, dma_we, dma_gnt, dma_rvalid, sleeping;
  bank_role_e role [P];
  logic [ACC_W-1:0] model [P][64];
  int checks = 0, failures = 0, ndma = 0, nconflict = 0;

  redas_mm_buffer #(.P(P), .SIDE(1), .DEPTH(64)) dut (
    .clk, .rst_n, .gemm_load(1'b0), .gemm('0), .gemm_busy(1'b0), .phase(PH_IDLE), .pt('0),
    .arr_out, .arr_in, .simd_req, .simd_we, .simd_addr, .simd_wdata, .simd_gnt, .simd_rvalid,
    .dma_req, .dma_we, .dma_addr, .dma_wdata, .dma_gnt, .dma_rvalid, .rdata, .sleeping, .role);

  initial begin : watchdog
    #(5_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    logic [ACC_W-1:0] exp_d [P];
    logic exp_s [P], exp_m [P];
    for (int k = 0; k < P; k++) begin arr_in[k] = '0; exp_s[k] = 0; exp_m[k] = 0; end
    simd_req = 0; simd_we = 0; simd_addr = 0; dma_req = 0; dma_we = 0;
    for (int k = 0; k < P; k++) begin simd_wdata[k] = 0; dma_wdata[k] = 0; dma_addr[k] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // initialise through the DMA path
    for (int a = 0; a < 64; a++) begin
      dma_req = '1; dma_we = '1;
      for (int k = 0; k < P; k++) begin dma_addr[k] = ADDR_W'(a); dma_wdata[k] = $urandom; model[k][a] = dma_wdata[k]; end
      @(negedge clk);
      while (dma_gnt != '1) @(negedge clk);
    end
    dma_req = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // read data of the previous cycle's grants
      for (int k = 0; k < P; k++) begin
        chk("simd rvalid", int'(simd_rvalid[k]), int'(exp_s[k]));
        chk("dma rvalid", int'(dma_rvalid[k]), int'(exp_m[k]));
        if (exp_s[k] || exp_m[k]) chk($sformatf("rdata bank%0d", k), int'(rdata[k]), int'(exp_d[k]));
      end
      simd_req = ($urandom_range(0, 3) == 0); simd_we = $urandom_range(0, 1); simd_addr = ADDR_W'($urandom_range(0, 63));
      for (int k = 0; k < P; k++) begin
        simd_wdata[k] = $urandom;
        dma_req[k] = $urandom_range(0, 1); dma_we[k] = $urandom_range(0, 1);
        dma_addr[k] = ADDR_W'($urandom_range(0, 63)); dma_wdata[k] = $urandom;
      end
      #1;
      for (int k = 0; k < P; k++) begin
        exp_s[k] = 0; exp_m[k] = 0;
        if (simd_req && dma_req[k]) begin nconflict++; chk("dma loses to simd", int'(dma_gnt[k]), 0); end
        if (!simd_req) chk("no simd grant without request", int'(simd_gnt[k]), 0);
        if (!dma_req[k]) chk("no dma grant without request", int'(dma_gnt[k]), 0);
        if (simd_gnt[k]) begin
          if (simd_we) model[k][simd_addr[5:0]] = simd_wdata[k];
          else begin exp_s[k] = 1; exp_d[k] = model[k][simd_addr[5:0]]; end
        end
        if (dma_gnt[k]) begin
          ndma++;
          if (dma_we[k]) model[k][dma_addr[k][5:0]] = dma_wdata[k];
          else begin exp_m[k] = 1; exp_d[k] = model[k][dma_addr[k][5:0]]; end
        end
      end
    end
    chk("conflicts seen", int'(nconflict > 0), 1);
    chk("dma grants seen", int'(ndma > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
