// redas_dram_model -- behavioural multi-channel DRAM for the testbenches.
//
// Stands in for the off-chip memory, which is not part of the design. Each
// channel accepts one request per cycle with a random grant (about three
// requests in four are accepted, so the DMA also sees DRAM back pressure);
// a read returns its word LAT cycles after the grant. All channels share
// one word-addressed store, mem, that testbenches fill and inspect
// directly; unwritten words read as zero.
module redas_dram_model
  import redas_pkg::*;
#(
  parameter int unsigned NCH = NUM_CH,
  parameter int unsigned LAT = 3
) (
  input  logic               clk,
  input  logic [NCH-1:0]     req,
  input  logic [NCH-1:0]     we,
  input  logic [DRAM_AW-1:0] addr  [NCH],
  input  logic [ACC_W-1:0]   wdata [NCH],
  output logic [NCH-1:0]     gnt,
  output logic [NCH-1:0]     rvalid,
  output logic [ACC_W-1:0]   rdata [NCH],
  output int                 n_refused
);

  logic [ACC_W-1:0] mem [int unsigned];
  int               cnt  [NCH];
  logic [ACC_W-1:0] pend [NCH];

  initial begin
    n_refused = 0;
    for (int c = 0; c < int'(NCH); c++) begin cnt[c] = 0; pend[c] = '0; end
  end

  always @(negedge clk) begin
    for (int c = 0; c < int'(NCH); c++) gnt[c] = ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) begin
    for (int c = 0; c < int'(NCH); c++) begin
      rvalid[c] <= 1'b0;
      if (cnt[c] > 0) begin
        cnt[c] = cnt[c] - 1;
        if (cnt[c] == 0) begin rvalid[c] <= 1'b1; rdata[c] <= pend[c]; end
      end
      if (req[c] && !gnt[c]) n_refused++;
      if (req[c] && gnt[c]) begin
        if (we[c]) mem[addr[c]] = wdata[c];
        else begin
          pend[c] = mem.exists(addr[c]) ? mem[addr[c]] : '0;
          cnt[c]  = LAT;
        end
      end
    end
  end

endmodule
