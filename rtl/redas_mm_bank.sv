// redas_mm_bank -- one bank of the multi-mode buffer.
//
// A bank sits next to one edge PE (side, idx: constant inputs giving its
// position) and is joined to it by a link in each
// direction (arr_out feeds the array, arr_in comes from it). It holds a
// 1R1W memory (redas_sram), an accumulator for partial sums coming back
// from the array (redas_accumulator) and a bank controller that sets the
// bank's role for the current tile (redas_bank_ctrl). Words are ACC_W bits;
// operands use the low DATA_W bits. The side port is shared by the SIMD
// unit and the DMA (arbitrated one level up). arr_out is valid one cycle
// after the controller decides to issue; side read data one cycle after
// the grant.
module redas_mm_bank
  import redas_pkg::*;
#(
  parameter int unsigned P     = ARRAY_P,
  parameter int unsigned DEPTH = BANK_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            side,
  input  logic [15:0]           idx,
  input  logic                  gemm_load,
  input  gemm_t                 gemm,
  input  logic                  gemm_busy,
  input  phase_e                phase,
  input  logic [LEN_W+RL_W+2:0] pt,
  output link_t                 arr_out,
  input  link_t                 arr_in,
  input  logic                  side_req,
  input  logic                  side_we,
  input  logic [ADDR_W-1:0]     side_addr,
  input  logic [ACC_W-1:0]      side_wdata,
  output logic                  side_gnt,
  output logic                  side_rvalid,
  output logic [ACC_W-1:0]      side_rdata,
  output bank_role_e            role,
  output logic                  sleeping
);

  logic              acc_in_v, acc_en, acc_rd_req, acc_wr_en;
  logic [ADDR_W-1:0] acc_in_addr, acc_rd_addr, acc_wr_addr;
  logic [ACC_W-1:0]  acc_wr_data, rdata;
  logic              mem_sleep, mem_re, mem_we, issue_v;
  logic [ADDR_W-1:0] mem_raddr, mem_waddr;
  logic [ACC_W-1:0]  mem_wdata;

  redas_bank_ctrl #(.P(P)) u_ctrl (
    .clk, .rst_n, .side, .idx, .gemm_load, .gemm, .gemm_busy, .phase, .pt,
    .arr_in_v(arr_in.v),
    .side_req, .side_we, .side_addr, .side_wdata, .side_gnt, .side_rvalid,
    .acc_in_v, .acc_in_addr, .acc_en, .acc_rd_req, .acc_rd_addr,
    .acc_wr_en, .acc_wr_addr, .acc_wr_data,
    .mem_sleep, .mem_re, .mem_raddr, .mem_we, .mem_waddr, .mem_wdata,
    .issue_v, .role, .sleeping
  );

  redas_accumulator u_acc (
    .clk, .rst_n, .in_v(acc_in_v), .in_d(arr_in.d), .in_addr(acc_in_addr), .acc_en,
    .rd_req(acc_rd_req), .rd_addr(acc_rd_addr), .rd_data(rdata),
    .wr_en(acc_wr_en), .wr_addr(acc_wr_addr), .wr_data(acc_wr_data)
  );

  redas_sram #(.DEPTH(DEPTH), .WIDTH(ACC_W), .AW(ADDR_W)) u_mem (
    .clk, .sleep(mem_sleep), .re(mem_re), .raddr(mem_raddr), .rdata,
    .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata)
  );

  assign arr_out    = issue_v ? '{v: 1'b1, d: rdata} : '0;
  assign side_rdata = rdata;

endmodule
