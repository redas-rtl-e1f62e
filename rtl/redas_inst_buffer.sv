// redas_inst_buffer -- instruction FIFO in front of the controller.
//
// The paper's mapper produces, per tile, the dataflow, shape and buffer
// layout; they reach the accelerator as instructions held in an
// instruction buffer. This is a synchronous FIFO of instr_t words with
// DEPTH entries: push when not full, pop (by the controller) when not
// empty; the head is visible combinationally (show-ahead). Push and pop in
// the same cycle are allowed.
//
// The paper names the instruction buffer only; depth and the show-ahead
// FIFO are this design's choices.
module redas_inst_buffer
  import redas_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push,
  input  instr_t din,
  output logic   full,
  input  logic   pop,
  output logic   valid,
  output instr_t head
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  instr_t mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [AW:0]   cnt_q;

  wire do_push = push && !full;
  wire do_pop  = pop && valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wp_q <= (wp_q == AW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      if (do_pop)  rp_q <= (rp_q == AW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp_q] <= din;

  assign full  = (cnt_q == (AW+1)'(DEPTH));
  assign valid = (cnt_q != '0);
  assign head  = mem[rp_q];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= (AW+1)'(DEPTH));

endmodule
