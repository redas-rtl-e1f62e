// redas_controller -- sequencer of the accelerator.
//
// Takes instructions from the instruction buffer, in order:
//   GEMM: runs one tile on the array. Sequence (bank-side time):
//         CONFIG  P+1 cycles: the configuration word walks down the rows
//                 (paper: configuration takes R_p cycles);
//         PRELOAD depth cycles (WS/IS): stationary operand shifted in;
//         CLEAR   1 cycle: OS accumulators cleared;
//         COMPUTE compute_cycles() cycles;
//         DRAIN   depth+2 cycles (OS): results shifted out;
//         TAIL    4 cycles: last outputs reach the banks and are written.
//         The array sees the same phases one cycle later (arr_*), matching
//         the one-cycle read latency of the banks.
//   SIMD: started on the SIMD unit of its side;
//   DMA : started on channel bank % NUM_CH;
//   NOP : barrier -- waits until the GEMM, every SIMD unit and every DMA
//         channel are idle.
// SIMD and DMA run concurrently with a GEMM. The head instruction waits
// (a dispatch stall) while its unit is busy; a GEMM waits for the previous
// one. The controller counts GEMMs, dataflow switches and shape changes
// between consecutive GEMMs, and dispatch stall cycles.
//
// Follows the paper: configuration in P cycles, then the dataflow's
// phases. Own choices: the instruction set, the NOP barrier and the
// compute-phase bound.
module redas_controller
  import redas_pkg::*;
#(
  parameter int unsigned P   = ARRAY_P,
  parameter int unsigned NCH = NUM_CH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // instruction buffer
  input  logic                  ib_valid,
  input  instr_t                ib_head,
  output logic                  ib_pop,
  // banks
  output logic                  gemm_load,
  output gemm_t                 gemm,
  output logic                  gemm_busy,
  output phase_e                phase,
  output logic [LEN_W+RL_W+2:0] pt,
  // array (one cycle behind the banks)
  output logic                  arr_cfg_load,
  output arr_cfg_t              arr_cfg,
  output phase_e                arr_phase,
  output logic                  arr_phase_start,
  output logic                  arr_clear,
  // SIMD units
  output logic [3:0]            simd_start,
  output simd_t                 simd_cmd,
  input  logic [3:0]            simd_busy,
  // DMA
  output logic [NCH-1:0]        dma_start,
  output dma_desc_t             dma_desc,
  input  logic [NCH-1:0]        dma_busy,
  // status
  output logic                  idle,
  output logic [15:0]           n_gemm,
  output logic [15:0]           n_df_switch,
  output logic [15:0]           n_reshape,
  output logic [15:0]           n_stall
);

  typedef enum logic [2:0] {G_IDLE, G_CONFIG, G_PRELOAD, G_CLEAR, G_COMPUTE, G_DRAIN, G_TAIL} gstate_e;

  localparam int PTW = LEN_W + RL_W + 3;

  gstate_e          gs_q;
  gemm_t            g_q;
  logic [PTW-1:0]   cnt_q;
  logic             have_prev_q;
  arr_cfg_t         prev_q;

  arr_cfg_t g_cfg;
  assign g_cfg = '{df: g_q.df, shape: g_q.shape, rl: g_q.rl};

  // length of the current GEMM state
  logic [PTW-1:0] glen;
  always_comb begin
    case (gs_q)
      G_CONFIG:  glen = PTW'(P + 1);
      G_PRELOAD: glen = PTW'(cross_depth(g_cfg, int'(P)));
      G_CLEAR:   glen = PTW'(1);
      G_COMPUTE: glen = PTW'(compute_cycles(g_cfg, int'(P), int'(g_q.len)));
      G_DRAIN:   glen = PTW'(cross_depth(g_cfg, int'(P)) + 2);
      G_TAIL:    glen = PTW'(4);
      default:   glen = '0;
    endcase
  end

  // ------------------------------------------------------------- dispatch
  logic    can_go;
  instr_t  h;
  assign h = ib_head;
  always_comb begin
    can_go = 1'b0;
    if (ib_valid) begin
      case (h.op)
        OP_GEMM: can_go = (gs_q == G_IDLE);
        OP_SIMD: can_go = !simd_busy[h.simd.side];
        OP_DMA:  can_go = !dma_busy[int'(h.dma.bank) % int'(NCH)];
        default: can_go = (gs_q == G_IDLE) && !(|simd_busy) && !(|dma_busy);
      endcase
    end
  end
  assign ib_pop   = can_go;
  assign simd_cmd = h.simd;
  assign dma_desc = h.dma;
  always_comb begin
    simd_start = '0;
    dma_start  = '0;
    if (can_go && h.op == OP_SIMD) simd_start[h.simd.side] = 1'b1;
    if (can_go && h.op == OP_DMA)  dma_start[int'(h.dma.bank) % int'(NCH)] = 1'b1;
  end
  wire start_gemm = can_go && h.op == OP_GEMM;

  // ---------------------------------------------------------- GEMM sequence
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs_q        <= G_IDLE;
      g_q         <= '0;
      cnt_q       <= '0;
      have_prev_q <= 1'b0;
      prev_q      <= '0;
      n_gemm      <= '0;
      n_df_switch <= '0;
      n_reshape   <= '0;
      n_stall     <= '0;
    end else begin
      if (ib_valid && !can_go) n_stall <= n_stall + 1'b1;
      if (start_gemm) begin
        g_q    <= h.gemm;
        gs_q   <= G_CONFIG;
        cnt_q  <= '0;
        n_gemm <= n_gemm + 1'b1;
        have_prev_q <= 1'b1;
        prev_q <= '{df: h.gemm.df, shape: h.gemm.shape, rl: h.gemm.rl};
        if (have_prev_q && prev_q.df != h.gemm.df) n_df_switch <= n_df_switch + 1'b1;
        if (have_prev_q && (prev_q.shape != h.gemm.shape ||
                            (h.gemm.shape != SH_SQUARE && prev_q.rl != h.gemm.rl)))
          n_reshape <= n_reshape + 1'b1;
      end else if (gs_q != G_IDLE) begin
        if (cnt_q + 1'b1 >= glen) begin
          cnt_q <= '0;
          case (gs_q)
            G_CONFIG:  gs_q <= (g_q.df == DF_OS) ? G_CLEAR : G_PRELOAD;
            G_PRELOAD: gs_q <= G_CLEAR;
            G_CLEAR:   gs_q <= G_COMPUTE;
            G_COMPUTE: gs_q <= (g_q.df == DF_OS) ? G_DRAIN : G_TAIL;
            G_DRAIN:   gs_q <= G_TAIL;
            default:   gs_q <= G_IDLE;
          endcase
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end

  assign gemm_load = start_gemm;
  assign gemm      = start_gemm ? h.gemm : g_q;
  assign gemm_busy = (gs_q != G_IDLE);
  assign pt        = cnt_q;
  always_comb begin
    case (gs_q)
      G_PRELOAD: phase = PH_PRELOAD;
      G_COMPUTE: phase = PH_COMPUTE;
      G_DRAIN:   phase = PH_DRAIN;
      default:   phase = PH_IDLE;
    endcase
  end

  // array side, one cycle later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_cfg_load    <= 1'b0;
      arr_cfg         <= '0;
      arr_phase       <= PH_IDLE;
      arr_phase_start <= 1'b0;
      arr_clear       <= 1'b0;
    end else begin
      arr_cfg_load    <= start_gemm;
      if (start_gemm) arr_cfg <= '{df: h.gemm.df, shape: h.gemm.shape, rl: h.gemm.rl};
      arr_phase       <= phase;
      arr_phase_start <= (gs_q == G_DRAIN) && (cnt_q == '0);
      arr_clear       <= (gs_q == G_CLEAR);
    end
  end

  assign idle = (gs_q == G_IDLE) && !(|simd_busy) && !(|dma_busy) && !ib_valid;

endmodule
