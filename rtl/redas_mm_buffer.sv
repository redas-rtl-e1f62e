// redas_mm_buffer -- the multi-mode buffer on one side of the array.
//
// The paper splits the on-chip buffer into banks, one per edge PE, on all
// four sides of the array, so every edge PE can issue and receive data.
// This module is the P banks of one side (SIDE: 0 N, 1 E, 2 S, 3 W; bank k
// faces edge PE k of that side). It also arbitrates each bank's side port
// between the SIMD unit of this side and the DMA: the SIMD unit, which
// works on all P banks in lock step, has priority; the DMA waits. The
// array itself always has priority inside the bank (redas_bank_ctrl).
// Read data returns one cycle after a grant, tagged by simd_rvalid or
// dma_rvalid.
//
// Follows the paper: one bank per edge PE on all four sides. Own choice:
// SIMD over DMA priority.
module redas_mm_buffer
  import redas_pkg::*;
#(
  parameter int unsigned P     = ARRAY_P,
  parameter int unsigned SIDE  = 0,
  parameter int unsigned DEPTH = BANK_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  gemm_load,
  input  gemm_t                 gemm,
  input  logic                  gemm_busy,
  input  phase_e                phase,
  input  logic [LEN_W+RL_W+2:0] pt,
  output link_t                 arr_out [P],
  input  link_t                 arr_in  [P],
  // SIMD unit (lock step over all banks)
  input  logic                  simd_req,
  input  logic                  simd_we,
  input  logic [ADDR_W-1:0]     simd_addr,
  input  logic [ACC_W-1:0]      simd_wdata [P],
  output logic [P-1:0]          simd_gnt,
  output logic [P-1:0]          simd_rvalid,
  // DMA, one request per bank
  input  logic [P-1:0]          dma_req,
  input  logic [P-1:0]          dma_we,
  input  logic [ADDR_W-1:0]     dma_addr  [P],
  input  logic [ACC_W-1:0]      dma_wdata [P],
  output logic [P-1:0]          dma_gnt,
  output logic [P-1:0]          dma_rvalid,
  output logic [ACC_W-1:0]      rdata [P],
  output logic [P-1:0]          sleeping,
  output bank_role_e            role [P]
);

  for (genvar k = 0; k < int'(P); k++) begin : g_bank
    logic              req, we, gnt, rv, owner_q, use_simd;
    logic [ADDR_W-1:0] addr;
    logic [ACC_W-1:0]  wdata;
    assign use_simd = simd_req;
    assign req   = simd_req || dma_req[k];
    assign we    = use_simd ? simd_we : dma_we[k];
    assign addr  = use_simd ? simd_addr : dma_addr[k];
    assign wdata = use_simd ? simd_wdata[k] : dma_wdata[k];

    redas_mm_bank #(.P(P), .DEPTH(DEPTH)) u_bank (
      .clk, .rst_n, .side(2'(SIDE)), .idx(16'(k)), .gemm_load, .gemm, .gemm_busy, .phase, .pt,
      .arr_out(arr_out[k]), .arr_in(arr_in[k]),
      .side_req(req), .side_we(we), .side_addr(addr), .side_wdata(wdata),
      .side_gnt(gnt), .side_rvalid(rv), .side_rdata(rdata[k]),
      .role(role[k]), .sleeping(sleeping[k])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) owner_q <= 1'b0;
      else        owner_q <= use_simd;
    end
    assign simd_gnt[k]    = gnt && use_simd;
    assign dma_gnt[k]     = gnt && !use_simd;
    assign simd_rvalid[k] = rv && owner_q;
    assign dma_rvalid[k]  = rv && !owner_q;
  end

endmodule
