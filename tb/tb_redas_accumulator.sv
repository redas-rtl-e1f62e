// tb_redas_accumulator -- streams of partial sums into a memory model,
// with and without accumulation, checked word by word.
module tb_redas_accumulator;
  import redas_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_v, acc_en, rd_req, wr_en;
  logic [ACC_W-1:0] in_d, rd_data, wr_data;
  logic [ADDR_W-1:0] in_addr, rd_addr, wr_addr;
  logic [ACC_W-1:0] mem [64];
  logic [ACC_W-1:0] model [64];
  int checks = 0, failures = 0;

  redas_accumulator dut (.clk, .rst_n, .in_v, .in_d, .in_addr, .acc_en,
    .rd_req, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  // memory with one-cycle read latency
  always @(posedge clk) begin
    if (rd_req) rd_data <= mem[rd_addr[5:0]];
    if (wr_en)  mem[wr_addr[5:0]] <= wr_data;
  end

  initial begin : watchdog
    #(1_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_v = 0; acc_en = 0; in_d = 0; in_addr = 0;
    for (int a = 0; a < 64; a++) begin mem[a] = $urandom; model[a] = mem[a]; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      automatic int n = $urandom_range(1, 40), base = $urandom_range(0, 20);
      automatic logic a = $urandom_range(0, 1);
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        in_v = $urandom_range(0, 3) != 0;
        acc_en = a;
        in_addr = ADDR_W'(base + t);
        in_d = $urandom;
        if (in_v) model[base + t] = a ? model[base + t] + in_d : in_d;
      end
      @(negedge clk); in_v = 0;
      repeat (2) @(negedge clk);
    end
    for (int a = 0; a < 64; a++) begin
      checks++;
      if (mem[a] !== model[a]) begin failures++; $display("FAIL addr %0d got %h exp %h", a, mem[a], model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
