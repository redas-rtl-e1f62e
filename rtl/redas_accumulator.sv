// redas_accumulator -- accumulator of one buffer bank (WS/IS dataflows).
//
// Partial sums leave the array at the bank's edge PE one per cycle. With
// acc_en the accumulator adds each one to the word already stored at its
// address (read in the cycle the sum arrives, added and written back in
// the next cycle); without acc_en it simply stores it. This lets a GEMM
// whose reduction dimension exceeds the array be run as several tiles
// into the same output region. Addresses of consecutive sums differ, so
// the one-cycle read-modify-write needs no forwarding.
//
// The paper lists accumulators beside the banks; the one-cycle
// read-modify-write is this design's choice.
module redas_accumulator
  import redas_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_v,
  input  logic [ACC_W-1:0]   in_d,
  input  logic [ADDR_W-1:0]  in_addr,
  input  logic               acc_en,
  // to the bank memory
  output logic               rd_req,
  output logic [ADDR_W-1:0]  rd_addr,
  input  logic [ACC_W-1:0]   rd_data,
  output logic               wr_en,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [ACC_W-1:0]   wr_data
);

  logic              v_q, acc_q;
  logic [ACC_W-1:0]  d_q;
  logic [ADDR_W-1:0] a_q;

  assign rd_req  = in_v && acc_en;
  assign rd_addr = in_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; acc_q <= 1'b0; d_q <= '0; a_q <= '0;
    end else begin
      v_q   <= in_v;
      acc_q <= acc_en;
      d_q   <= in_d;
      a_q   <= in_addr;
    end
  end

  assign wr_en   = v_q;
  assign wr_addr = a_q;
  assign wr_data = acc_q ? (rd_data + d_q) : d_q;

endmodule
