// tb_redas_sram -- random writes and reads of the bank memory against a
// model; read data must appear one cycle after the request; a sleeping
// memory must keep its contents and return zero.
module tb_redas_sram;
  localparam int DEPTH = 64, W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic sleep, re, we;
  logic [5:0] raddr, waddr;
  logic [W-1:0] rdata, wdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  redas_sram #(.DEPTH(DEPTH), .WIDTH(W)) dut (.clk, .sleep, .re, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin : watchdog
    #(1_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] exp;
    logic         exp_v;
    sleep = 0; re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    exp_v = 0; exp = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL read got %h exp %h", rdata, exp); end
      end
      re = $urandom_range(0, 1); raddr = 6'($urandom);
      we = $urandom_range(0, 1); waddr = 6'($urandom); wdata = $urandom;
      exp_v = re; exp = model[raddr];
      if (we) model[waddr] = wdata;
      if (re && we && raddr == waddr) exp_v = 0;   // read-during-write: either value allowed
    end
    // sleep keeps contents
    @(negedge clk); re = 0; we = 0; sleep = 1;
    repeat (5) @(negedge clk);
    checks++; if (rdata !== '0) begin failures++; $display("FAIL sleeping read port not zero"); end
    sleep = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL after sleep addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
