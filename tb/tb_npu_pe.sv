// tb_npu_pe: 200 random signed operand pairs (a third of them zero) against a
// reference accumulator; the skip flag must be set exactly for zero operands
// and clr must restart the sum.
module tb_npu_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, en = 0, skip;
  logic signed [7:0] a = 0, b = 0;
  logic signed [31:0] psum;
  int checks = 0, failures = 0;
  npu_pe dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int acc;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    acc = 0;
    for (int i = 0; i < 200; i++) begin
      en = ($urandom_range(0, 4) != 0);
      a = ($urandom_range(0, 2) == 0) ? 8'sd0 : 8'($urandom);
      b = ($urandom_range(0, 5) == 0) ? 8'sd0 : 8'($urandom);
      #1;
      checks++;
      if (skip != (en && (a == 0 || b == 0))) begin failures++; $display("FAIL: skip"); end
      if (en) acc += int'(a) * int'(b);
      @(negedge clk);
      checks++;
      if (psum != acc) begin failures++; $display("FAIL: psum %0d exp %0d", psum, acc); end
      if (i == 100) begin clr = 1; en = 0; @(negedge clk); clr = 0; acc = 0; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
