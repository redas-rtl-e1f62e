// redas_bank_ctrl -- controller of one multi-mode buffer bank.
//
// The paper gives each bank its own controller that decides, per
// dataflow, whether the bank issues input data, issues weights, or
// receives outputs (a bank may change role between tiles). Here the role
// and timing come from redas_pkg::bank_plan(), evaluated for this bank's
// position (side, idx -- constant inputs, so every bank is the same
// module) when a GEMM tile is loaded (gemm_load).
//
// Timing. The controller broadcasts the bank-side phase and a cycle count
// pt within it. A bank that issues at pt reads its memory in that cycle;
// the word reaches the array edge one cycle later, and the array's phase
// lags the banks' by the same one cycle, so issue offsets are exact.
// Preload words are read from the top of the region downward
// (base+len-1 .. base), so the region holds S[depth] at base+depth.
// Outputs leave the array one further cycle later; receiving is therefore
// enabled by the phase delayed by two cycles and driven by the valid bit
// of the incoming link: the n-th word received goes to out_base+n, through
// the accumulator (read-modify-write when acc is set).
//
// Ports of the memory. Read: array issue, then accumulator read, then the
// side port. Write: accumulator, then side port. The side port (SIMD unit
// or DMA) is granted only when the port it needs is free -- otherwise it
// stalls, so the array never waits for it.
//
// Sleep (this design's choice, not in the paper): after SLEEP_IDLE idle
// cycles the memory is put in retention; a side request or an active GEMM
// wakes it in one cycle (the side request waits that cycle).
module redas_bank_ctrl
  import redas_pkg::*;
#(
  parameter int unsigned P          = ARRAY_P,
  parameter int unsigned SLEEP_IDLE = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            side,         // 0 N, 1 E, 2 S, 3 W
  input  logic [15:0]           idx,          // edge PE faced by the bank
  input  logic                  gemm_load,
  input  gemm_t                 gemm,
  input  logic                  gemm_busy,
  input  phase_e                phase,
  input  logic [LEN_W+RL_W+2:0] pt,
  input  logic                  arr_in_v,
  // side port
  input  logic                  side_req,
  input  logic                  side_we,
  input  logic [ADDR_W-1:0]     side_addr,
  input  logic [ACC_W-1:0]      side_wdata,
  output logic                  side_gnt,
  output logic                  side_rvalid,
  // accumulator
  output logic                  acc_in_v,
  output logic [ADDR_W-1:0]     acc_in_addr,
  output logic                  acc_en,
  input  logic                  acc_rd_req,
  input  logic [ADDR_W-1:0]     acc_rd_addr,
  input  logic                  acc_wr_en,
  input  logic [ADDR_W-1:0]     acc_wr_addr,
  input  logic [ACC_W-1:0]      acc_wr_data,
  // memory
  output logic                  mem_sleep,
  output logic                  mem_re,
  output logic [ADDR_W-1:0]     mem_raddr,
  output logic                  mem_we,
  output logic [ADDR_W-1:0]     mem_waddr,
  output logic [ACC_W-1:0]      mem_wdata,
  // status
  output logic                  issue_v,      // aligned with the memory read data
  output bank_role_e            role,
  output logic                  sleeping
);

  bank_plan_t  plan_q;
  phase_e      ph_d1, ph_d2;
  logic [ADDR_W-1:0] rcnt_q;
  logic        sleep_q;
  logic [7:0]  idle_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plan_q <= '0;
      ph_d1  <= PH_IDLE;
      ph_d2  <= PH_IDLE;
    end else begin
      if (gemm_load) plan_q <= bank_plan(gemm, int'(P), int'(side), int'(idx));
      ph_d1 <= phase;
      ph_d2 <= ph_d1;
    end
  end
  assign role = plan_q.role;

  function automatic phase_plan_t plan_of(bank_plan_t b, phase_e ph);
    case (ph)
      PH_PRELOAD: return b.pre;
      PH_COMPUTE: return b.comp;
      PH_DRAIN:   return b.drn;
      default:    return '0;
    endcase
  endfunction

  // ---------------------------------------------------------------- issue
  phase_plan_t cur, rcur;
  logic        issue;
  logic [LEN_W+RL_W+2:0] rel;
  always_comb begin
    cur   = plan_of(plan_q, phase);
    rel   = pt - cur.off;
    issue = gemm_busy && cur.act == BA_ISSUE && pt >= cur.off && rel < (LEN_W+RL_W+3)'(cur.len);
  end
  logic [ADDR_W-1:0] issue_addr;
  assign issue_addr = (phase == PH_PRELOAD) ? cur.base + ADDR_W'(cur.len) - 1'b1 - ADDR_W'(rel)
                                            : cur.base + ADDR_W'(rel);

  // -------------------------------------------------------------- receive
  always_comb begin
    rcur        = plan_of(plan_q, ph_d2);
    acc_in_v    = arr_in_v && rcur.act == BA_RECV;
    acc_in_addr = rcur.base + rcnt_q;
    acc_en      = rcur.acc;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rcnt_q <= '0;
    else if (gemm_load) rcnt_q <= '0;
    else if (acc_in_v)  rcnt_q <= rcnt_q + 1'b1;
  end

  // ---------------------------------------------------- port arbitration
  logic rd_free, wr_free;
  always_comb begin
    rd_free  = !(issue || acc_rd_req);
    wr_free  = !acc_wr_en;
    side_gnt = side_req && !sleep_q && (side_we ? wr_free : rd_free);
    mem_re    = issue || acc_rd_req || (side_gnt && !side_we);
    mem_raddr = issue ? issue_addr : acc_rd_req ? acc_rd_addr : side_addr;
    mem_we    = acc_wr_en || (side_gnt && side_we);
    mem_waddr = acc_wr_en ? acc_wr_addr : side_addr;
    mem_wdata = acc_wr_en ? acc_wr_data : side_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_v     <= 1'b0;
      side_rvalid <= 1'b0;
    end else begin
      issue_v     <= issue;
      side_rvalid <= side_gnt && !side_we;
    end
  end

  // ----------------------------------------------------------------- sleep
  wire busy = (gemm_busy && plan_q.role != BR_IDLE) || side_req || acc_wr_en || gemm_load;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sleep_q <= 1'b0;
      idle_q  <= '0;
    end else if (busy) begin
      sleep_q <= 1'b0;
      idle_q  <= '0;
    end else if (idle_q >= 8'(SLEEP_IDLE)) begin
      sleep_q <= 1'b1;
    end else begin
      idle_q  <= idle_q + 1'b1;
    end
  end
  assign mem_sleep = sleep_q;
  assign sleeping  = sleep_q;

  a_no_issue_asleep: assert property (@(posedge clk) disable iff (!rst_n) !(issue && sleep_q))
    else $error("bank issues while asleep");
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) !(issue && acc_rd_req))
    else $error("issue and accumulate in the same cycle");

endmodule
