// redas_sram -- behavioural memory of one multi-mode buffer bank.
//
// Written as a plain array, so it can be mapped to an SRAM macro by a
// memory compiler, as the paper does. One read port and one write port
// (simple dual port): the bank can issue a stream to the array while the
// accumulator writes back, or while the DMA refills the other half of the
// bank (ping-pong). Read data appears one cycle after the request.
// sleep puts an idle bank into retention: contents are kept, accesses are
// not allowed (asserted) and the read port returns zero.
module redas_sram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             sleep,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && !sleep) mem[waddr] <= wdata;
    if (re && !sleep) rdata <= mem[raddr];
    else              rdata <= '0;
  end

  property p_no_access_asleep;
    @(posedge clk) sleep |-> !(re || we);
  endproperty
  a_no_access_asleep: assert property (p_no_access_asleep)
    else $error("access to a sleeping bank");

endmodule
