// redas_simd_unit -- vector unit on one side of the array.
//
// The paper places a SIMD unit next to the buffer for element-wise work
// between GEMMs (activations, with non-linear functions evaluated through
// an NN-LUT style piece-wise linear table). This unit has P lanes, one per
// bank of its side, and works in lock step: for k = 0..len-1 it reads word
// src+k of every bank, applies the operation and writes the result to
// dst+k of the same bank. Operations: COPY, RELU and PWL. PWL uses a
// programmable table of LUT_SEG segments: segment s covers x >= bp[s]
// (the largest such s wins; segment 0 has no lower bound) and gives
// y = ((x * slope[s]) >>> SLOPE_FRAC) + icpt[s].
//
// Timing: a read request is held until every bank has granted it once
// (the bank grants only when the array leaves its port free -- a stall),
// one cycle later all read data are in; the write request is then held
// until every bank has granted it. So an element takes at least three
// cycles. start is accepted only when busy is low.
module redas_simd_unit
  import redas_pkg::*;
#(
  parameter int unsigned P = ARRAY_P
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  simd_t                     cmd,
  output logic                      busy,
  // table programming
  input  logic                      lut_we,
  input  logic [$clog2(LUT_SEG)-1:0] lut_idx,
  input  logic signed [ACC_W-1:0]   lut_bp,
  input  logic signed [15:0]        lut_slope,
  input  logic signed [ACC_W-1:0]   lut_icpt,
  // buffer side port
  output logic                      req,
  output logic                      we,
  output logic [ADDR_W-1:0]         addr,
  output logic [ACC_W-1:0]          wdata [P],
  input  logic [P-1:0]              gnt,
  input  logic [P-1:0]              rvalid,
  input  logic [ACC_W-1:0]          rdata [P],
  output logic                      stall        // request held and refused somewhere
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_RDW, S_WR} state_e;
  state_e state_q;
  simd_t  cmd_q;
  logic [ADDR_W:0]   k_q;
  logic [P-1:0]      done_q;
  logic [ACC_W-1:0]  res_q [P];

  logic signed [ACC_W-1:0] bp_q    [LUT_SEG];
  logic signed [15:0]      slope_q [LUT_SEG];
  logic signed [ACC_W-1:0] icpt_q  [LUT_SEG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(LUT_SEG); s++) begin
        bp_q[s] <= '0; slope_q[s] <= '0; icpt_q[s] <= '0;
      end
    end else if (lut_we) begin
      bp_q[lut_idx]    <= lut_bp;
      slope_q[lut_idx] <= lut_slope;
      icpt_q[lut_idx]  <= lut_icpt;
    end
  end

  function automatic logic [ACC_W-1:0] apply(simd_op_e op, logic signed [ACC_W-1:0] x);
    int unsigned seg;
    logic signed [ACC_W+15:0] prod;
    case (op)
      SO_RELU: return (x < 0) ? '0 : x;
      SO_PWL: begin
        seg = 0;
        for (int s = 1; s < int'(LUT_SEG); s++) if (x >= bp_q[s]) seg = s;
        prod = (ACC_W+16)'(x) * (ACC_W+16)'(slope_q[seg]);
        return ACC_W'(prod >>> SLOPE_FRAC) + icpt_q[seg];
      end
      default: return x;
    endcase
  endfunction

  wire [P-1:0] got = done_q | gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cmd_q   <= '0;
      k_q     <= '0;
      done_q  <= '0;
      for (int l = 0; l < int'(P); l++) res_q[l] <= '0;
    end else begin
      for (int l = 0; l < int'(P); l++)
        if (rvalid[l]) res_q[l] <= apply(cmd_q.op, rdata[l]);
      case (state_q)
        S_IDLE: if (start) begin
          cmd_q   <= cmd;
          k_q     <= '0;
          done_q  <= '0;
          state_q <= (cmd.len == 0) ? S_IDLE : S_RD;
        end
        S_RD: begin
          done_q <= got;
          if (&got) begin done_q <= '0; state_q <= S_RDW; end
        end
        S_RDW: state_q <= S_WR;
        S_WR: begin
          done_q <= got;
          if (&got) begin
            done_q <= '0;
            k_q    <= k_q + 1'b1;
            state_q <= (k_q + 1'b1 == cmd_q.len) ? S_IDLE : S_RD;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy  = (state_q != S_IDLE);
  assign req   = (state_q == S_RD) || (state_q == S_WR);
  assign we    = (state_q == S_WR);
  assign addr  = (state_q == S_WR) ? cmd_q.dst + ADDR_W'(k_q) : cmd_q.src + ADDR_W'(k_q);
  assign wdata = res_q;
  assign stall = req && !(&gnt);

endmodule
