// redas_top -- the ReDas accelerator: reshapeable multi-dataflow array,
// multi-mode buffers, SIMD units, DMA, instruction buffer and controller.
//
// Structure (paper Fig. 4): a P x P array of PEs (redas_pe_array); on each
// of its four sides a multi-mode buffer of P banks (redas_mm_buffer), bank
// k joined by a link pair to edge PE k; a SIMD unit per side working on
// that side's banks (redas_simd_unit); a DMA engine with NUM_CH channels
// (redas_dma) whose DRAM ports leave the chip; an instruction buffer
// (redas_inst_buffer) filled from outside, read by the controller
// (redas_controller). Side numbering: 0 N, 1 E, 2 S, 3 W.
//
// Interface: instructions are pushed through ib_push/ib_din (ib_full back
// pressure); the NN-LUT of all SIMD units is programmed through lut_*;
// each DMA channel has a request/response DRAM port (the DRAM itself is
// outside this design). Status outputs count the mechanisms: GEMMs,
// dataflow switches, reshapes, dispatch stalls, SIMD and DMA stall
// cycles, and show which banks sleep.
//
// Follows the paper: the block structure. Own choices: the instruction
// set, the mechanism counters and the default P of 64 (tool memory).
module redas_top
  import redas_pkg::*;
#(
  parameter int unsigned P        = ARRAY_P_ELAB,
  parameter int unsigned DEPTH    = BANK_DEPTH,
  parameter int unsigned NCH      = NUM_CH,
  parameter int unsigned IB_DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ib_push,
  input  instr_t                     ib_din,
  output logic                       ib_full,
  input  logic                       lut_we,
  input  logic [$clog2(LUT_SEG)-1:0] lut_idx,
  input  logic signed [ACC_W-1:0]    lut_bp,
  input  logic signed [15:0]         lut_slope,
  input  logic signed [ACC_W-1:0]    lut_icpt,
  output logic [NCH-1:0]             dram_req,
  output logic [NCH-1:0]             dram_we,
  output logic [DRAM_AW-1:0]         dram_addr  [NCH],
  output logic [ACC_W-1:0]           dram_wdata [NCH],
  input  logic [NCH-1:0]             dram_gnt,
  input  logic [NCH-1:0]             dram_rvalid,
  input  logic [ACC_W-1:0]           dram_rdata [NCH],
  output logic                       idle,
  output logic [15:0]                n_gemm,
  output logic [15:0]                n_df_switch,
  output logic [15:0]                n_reshape,
  output logic [15:0]                n_stall,
  output logic [3:0]                 simd_stall,
  output logic [NCH-1:0]             dma_stall,
  output logic [4*P-1:0]             bank_sleep
);

  // ------------------------------------------------ instruction buffer
  logic   ib_valid, ib_pop;
  instr_t ib_head;
  redas_inst_buffer #(.DEPTH(IB_DEPTH)) u_ib (
    .clk, .rst_n, .push(ib_push), .din(ib_din), .full(ib_full),
    .pop(ib_pop), .valid(ib_valid), .head(ib_head)
  );

  // -------------------------------------------------------- controller
  logic                  gemm_load, gemm_busy, arr_cfg_load, arr_phase_start, arr_clear;
  gemm_t                 gemm;
  phase_e                phase, arr_phase;
  logic [LEN_W+RL_W+2:0] pt;
  arr_cfg_t              arr_cfg, row_cfg_last;
  logic [3:0]            simd_start, simd_busy;
  simd_t                 simd_cmd;
  logic [NCH-1:0]        dma_start, dma_busy;
  dma_desc_t             dma_desc;

  redas_controller #(.P(P), .NCH(NCH)) u_ctrl (
    .clk, .rst_n, .ib_valid, .ib_head, .ib_pop,
    .gemm_load, .gemm, .gemm_busy, .phase, .pt,
    .arr_cfg_load, .arr_cfg, .arr_phase, .arr_phase_start, .arr_clear,
    .simd_start, .simd_cmd, .simd_busy, .dma_start, .dma_desc, .dma_busy,
    .idle, .n_gemm, .n_df_switch, .n_reshape, .n_stall
  );

  // ------------------------------------------------------------- array
  link_t to_arr   [4][P];
  link_t from_arr [4][P];
  redas_pe_array #(.P(P)) u_array (
    .clk, .rst_n, .cfg_load(arr_cfg_load), .cfg_in(arr_cfg),
    .phase(arr_phase), .phase_start(arr_phase_start), .clear(arr_clear),
    .in_n(to_arr[0]), .in_e(to_arr[1]), .in_s(to_arr[2]), .in_w(to_arr[3]),
    .out_n(from_arr[0]), .out_e(from_arr[1]), .out_s(from_arr[2]), .out_w(from_arr[3]),
    .row_cfg_last
  );

  // ------------------------------------------- buffers and SIMD units
  logic [P-1:0]      s_simd_gnt [4], s_simd_rv [4], s_dma_req [4], s_dma_we [4];
  logic [P-1:0]      s_dma_gnt [4], s_dma_rv [4], s_sleep [4];
  logic [ADDR_W-1:0] s_dma_addr [4][P];
  logic [ACC_W-1:0]  s_dma_wdata [4][P];
  logic [ACC_W-1:0]  s_rdata [4][P];
  logic [ACC_W-1:0]  s_simd_wdata [4][P];
  logic              s_simd_req [4], s_simd_we [4];
  logic [ADDR_W-1:0] s_simd_addr [4];
  bank_role_e        s_role [4][P];

  for (genvar s = 0; s < 4; s++) begin : g_side
    redas_mm_buffer #(.P(P), .SIDE(s), .DEPTH(DEPTH)) u_buf (
      .clk, .rst_n, .gemm_load, .gemm, .gemm_busy, .phase, .pt,
      .arr_out(to_arr[s]), .arr_in(from_arr[s]),
      .simd_req(s_simd_req[s]), .simd_we(s_simd_we[s]), .simd_addr(s_simd_addr[s]),
      .simd_wdata(s_simd_wdata[s]), .simd_gnt(s_simd_gnt[s]), .simd_rvalid(s_simd_rv[s]),
      .dma_req(s_dma_req[s]), .dma_we(s_dma_we[s]), .dma_addr(s_dma_addr[s]),
      .dma_wdata(s_dma_wdata[s]), .dma_gnt(s_dma_gnt[s]), .dma_rvalid(s_dma_rv[s]),
      .rdata(s_rdata[s]), .sleeping(s_sleep[s]), .role(s_role[s])
    );
    redas_simd_unit #(.P(P)) u_simd (
      .clk, .rst_n, .start(simd_start[s]), .cmd(simd_cmd), .busy(simd_busy[s]),
      .lut_we, .lut_idx, .lut_bp, .lut_slope, .lut_icpt,
      .req(s_simd_req[s]), .we(s_simd_we[s]), .addr(s_simd_addr[s]), .wdata(s_simd_wdata[s]),
      .gnt(s_simd_gnt[s]), .rvalid(s_simd_rv[s]), .rdata(s_rdata[s]), .stall(simd_stall[s])
    );
    assign bank_sleep[s*P +: P] = s_sleep[s];
  end

  // --------------------------------------------------------------- DMA
  logic [NCH-1:0]    c_req, c_we, c_gnt, c_rv;
  logic [15:0]       c_sel   [NCH];
  logic [ADDR_W-1:0] c_addr  [NCH];
  logic [ACC_W-1:0]  c_wdata [NCH];
  logic [ACC_W-1:0]  c_rdata [NCH];

  redas_dma #(.NCH(NCH)) u_dma (
    .clk, .rst_n, .start(dma_start), .desc(dma_desc), .busy(dma_busy),
    .bank_req(c_req), .bank_we(c_we), .bank_sel(c_sel), .bank_addr(c_addr),
    .bank_wdata(c_wdata), .bank_gnt(c_gnt), .bank_rvalid(c_rv), .bank_rdata(c_rdata),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .stall(dma_stall)
  );

  // bank g = side*P + index is served by channel g % NCH
  always_comb begin
    for (int s = 0; s < 4; s++) begin
      for (int k = 0; k < int'(P); k++) begin
        int c;
        c = (s * int'(P) + k) % int'(NCH);
        s_dma_req[s][k]   = c_req[c] && (int'(c_sel[c]) == s * int'(P) + k);
        s_dma_we[s][k]    = c_we[c];
        s_dma_addr[s][k]  = c_addr[c];
        s_dma_wdata[s][k] = c_wdata[c];
      end
    end
    for (int c = 0; c < int'(NCH); c++) begin
      int s, k;
      s = int'(c_sel[c]) / int'(P);
      k = int'(c_sel[c]) % int'(P);
      if (s > 3) s = 3;
      c_gnt[c]   = s_dma_gnt[s][k] && c_req[c];
      c_rv[c]    = s_dma_rv[s][k];
      c_rdata[c] = s_rdata[s][k];
    end
  end

endmodule
