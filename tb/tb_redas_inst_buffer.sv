// tb_redas_inst_buffer -- random pushes and pops against a queue model,
// including full and empty conditions.
module tb_redas_inst_buffer;
  import redas_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push, pop, full, valid;
  instr_t din, head;
  instr_t q [$];
  int checks = 0, failures = 0, nfull = 0;

  redas_inst_buffer #(.DEPTH(4)) dut (.clk, .rst_n, .push, .din, .full, .pop, .valid, .head);

  initial begin : watchdog
    #(1_000_000); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (valid !== (q.size() > 0) || full !== (q.size() == 4)) begin
        failures++; $display("FAIL flags size=%0d valid=%b full=%b", q.size(), valid, full);
      end
      if (q.size() > 0) begin
        checks++;
        if (head !== q[0]) begin failures++; $display("FAIL head"); end
      end
      if (full) nfull++;
      push = $urandom_range(0, 1);
      pop  = $urandom_range(0, 1);
      din  = {$urandom, $urandom, $urandom, $urandom, $urandom};
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push && !full) q.push_back(din);
    end
    checks++; if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
