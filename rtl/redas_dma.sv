// redas_dma -- DMA engine between off-chip DRAM and the buffer banks.
//
// The paper's accelerator has NUM_CH DRAM channels (Table 4: 8 channels of
// HBM2). Here each channel has its own engine and its own DRAM port; bank
// g (g = side*P + index) is served by channel g % NUM_CH, so transfers to
// banks of different channels run in parallel. A descriptor moves len
// words between DRAM address dram_addr.. and bank address bank_addr.. of
// one bank, in either direction (store = bank -> DRAM).
//
// Each word is one request/response pair on both sides:
//   load : DRAM read (held until dram_gnt), wait dram_rvalid, bank write
//          (held until bank_gnt);
//   store: bank read (held until bank_gnt), wait bank_rvalid, DRAM write
//          (held until dram_gnt).
// A refused bank request (the array or the SIMD unit is using the bank)
// is counted as a stall. start[c] is accepted only when busy[c] is low.
//
// Follows the paper: 8 DRAM channels. Own choice: channel = bank mod 8
// and one word per request.
module redas_dma
  import redas_pkg::*;
#(
  parameter int unsigned NCH = NUM_CH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NCH-1:0]         start,
  input  dma_desc_t              desc,
  output logic [NCH-1:0]         busy,
  // bank side, per channel
  output logic [NCH-1:0]         bank_req,
  output logic [NCH-1:0]         bank_we,
  output logic [15:0]            bank_sel   [NCH],
  output logic [ADDR_W-1:0]      bank_addr  [NCH],
  output logic [ACC_W-1:0]       bank_wdata [NCH],
  input  logic [NCH-1:0]         bank_gnt,
  input  logic [NCH-1:0]         bank_rvalid,
  input  logic [ACC_W-1:0]       bank_rdata [NCH],
  // DRAM side, per channel
  output logic [NCH-1:0]         dram_req,
  output logic [NCH-1:0]         dram_we,
  output logic [DRAM_AW-1:0]     dram_addr  [NCH],
  output logic [ACC_W-1:0]       dram_wdata [NCH],
  input  logic [NCH-1:0]         dram_gnt,
  input  logic [NCH-1:0]         dram_rvalid,
  input  logic [ACC_W-1:0]       dram_rdata [NCH],
  output logic [NCH-1:0]         stall
);

  typedef enum logic [2:0] {C_IDLE, C_DRD, C_DWAIT, C_BWR, C_BRD, C_BWAIT, C_DWR} cstate_e;

  for (genvar c = 0; c < int'(NCH); c++) begin : g_ch
    cstate_e          st_q;
    dma_desc_t        d_q;
    logic [ADDR_W:0]  k_q;
    logic [ACC_W-1:0] buf_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st_q  <= C_IDLE;
        d_q   <= '0;
        k_q   <= '0;
        buf_q <= '0;
      end else begin
        case (st_q)
          C_IDLE: if (start[c]) begin
            d_q  <= desc;
            k_q  <= '0;
            st_q <= (desc.len == 0) ? C_IDLE : (desc.store ? C_BRD : C_DRD);
          end
          C_DRD:   if (dram_gnt[c]) st_q <= C_DWAIT;
          C_DWAIT: if (dram_rvalid[c]) begin buf_q <= dram_rdata[c]; st_q <= C_BWR; end
          C_BWR:   if (bank_gnt[c]) begin
            k_q  <= k_q + 1'b1;
            st_q <= (k_q + 1'b1 == d_q.len) ? C_IDLE : C_DRD;
          end
          C_BRD:   if (bank_gnt[c]) st_q <= C_BWAIT;
          C_BWAIT: if (bank_rvalid[c]) begin buf_q <= bank_rdata[c]; st_q <= C_DWR; end
          C_DWR:   if (dram_gnt[c]) begin
            k_q  <= k_q + 1'b1;
            st_q <= (k_q + 1'b1 == d_q.len) ? C_IDLE : C_BRD;
          end
          default: st_q <= C_IDLE;
        endcase
      end
    end

    assign busy[c]       = (st_q != C_IDLE);
    assign bank_req[c]   = (st_q == C_BWR) || (st_q == C_BRD);
    assign bank_we[c]    = (st_q == C_BWR);
    assign bank_sel[c]   = d_q.bank;
    assign bank_addr[c]  = d_q.bank_addr + ADDR_W'(k_q);
    assign bank_wdata[c] = buf_q;
    assign dram_req[c]   = (st_q == C_DRD) || (st_q == C_DWR);
    assign dram_we[c]    = (st_q == C_DWR);
    assign dram_addr[c]  = d_q.dram_addr + DRAM_AW'(k_q);
    assign dram_wdata[c] = buf_q;
    assign stall[c]      = bank_req[c] && !bank_gnt[c];

    a_channel: assert property (@(posedge clk) disable iff (!rst_n)
                                (start[c] && !busy[c] && desc.len != 0) |-> (int'(desc.bank) % int'(NCH) == c))
      else $error("descriptor sent to the wrong channel");
  end

endmodule
