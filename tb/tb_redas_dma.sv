// tb_redas_dma -- loads and stores on a 4-channel DMA between the
// behavioural DRAM and per-bank memory models with random grants; every
// word moved is checked, and channels are run in parallel.
module tb_redas_dma;
  import redas_pkg::*;
  localparam int NCH = 4, NB = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [NCH-1:0] start, busy, bank_req, bank_we, bank_gnt, bank_rvalid, stall;
  logic [NCH-1:0] dram_req, dram_we, dram_gnt, dram_rvalid;
  dma_desc_t desc;
  logic [15:0] bank_sel [NCH];
  logic [ADDR_W-1:0] bank_addr [NCH];
  logic [ACC_W-1:0] bank_wdata [NCH], bank_rdata [NCH], dram_wdata [NCH], dram_rdata [NCH];
  logic [DRAM_AW-1:0] dram_addr [NCH];
  logic [ACC_W-1:0] bmem [NB][64];
  int n_refused, nstall = 0;
  int checks = 0, failures = 0;

  redas_dma #(.NCH(NCH)) dut (.clk, .rst_n, .start, .desc, .busy, .bank_req, .bank_we, .bank_sel,
    .bank_addr, .bank_wdata, .bank_gnt, .bank_rvalid, .bank_rdata,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata, .stall);
  redas_dram_model #(.NCH(NCH)) u_dram (.clk, .req(dram_req), .we(dram_we), .addr(dram_addr),
    .wdata(dram_wdata), .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata), .n_refused);

  always @(negedge clk) for (int c = 0; c < NCH; c++) bank_gnt[c] = bank_req[c] && ($urandom_range(0, 1) != 0);
  always @(posedge clk) begin
    if (|stall) nstall++;
    for (int c = 0; c < NCH; c++) begin
      bank_rvalid[c] <= bank_gnt[c] && !bank_we[c];
      if (bank_gnt[c] && !bank_we[c]) bank_rdata[c] <= bmem[bank_sel[c]][bank_addr[c][5:0]];
      if (bank_gnt[c] && bank_we[c])  bmem[bank_sel[c]][bank_addr[c][5:0]] <= bank_wdata[c];
    end
  end

  initial begin : watchdog
    #(5_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; desc = '0;
    for (int b = 0; b < NB; b++) for (int a = 0; a < 64; a++) bmem[b][a] = '0;
    for (int a = 0; a < 4096; a++) u_dram.mem[a] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    // loads: bank b gets dram[b*100 ..] at bank address 4.., all banks
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while (busy[b % NCH]) @(negedge clk);
      desc = '{store: 1'b0, bank: 16'(b), dram_addr: DRAM_AW'(b * 100), bank_addr: ADDR_W'(4), len: (ADDR_W+1)'(20)};
      start = '0; start[b % NCH] = 1'b1;
      @(negedge clk); start = '0;
    end
    while (|busy) @(negedge clk);
    for (int b = 0; b < NB; b++) for (int k = 0; k < 20; k++) begin
      checks++;
      if (bmem[b][4 + k] !== u_dram.mem[b * 100 + k]) begin failures++; if (failures < 10) $display("FAIL load bank%0d k%0d", b, k); end
    end
    // stores: bank b words 4..23 to dram 2000 + b*32
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while (busy[b % NCH]) @(negedge clk);
      desc = '{store: 1'b1, bank: 16'(b), dram_addr: DRAM_AW'(2000 + b * 32), bank_addr: ADDR_W'(4), len: (ADDR_W+1)'(20)};
      start = '0; start[b % NCH] = 1'b1;
      @(negedge clk); start = '0;
    end
    while (|busy) @(negedge clk);
    for (int b = 0; b < NB; b++) for (int k = 0; k < 20; k++) begin
      checks++;
      if (u_dram.mem[2000 + b * 32 + k] !== bmem[b][4 + k]) begin failures++; if (failures < 10) $display("FAIL store bank%0d k%0d", b, k); end
    end
    checks++; if (nstall == 0 || n_refused == 0) begin failures++; $display("FAIL no stalls seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
