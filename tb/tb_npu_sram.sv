// tb_npu_sram: random writes and reads of a 64 x 16 memory against a model,
// including the one-cycle read latency and read-during-write (old data).
module tb_npu_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  npu_sram #(.WIDTH(16), .DEPTH(64)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [15:0] m [64];
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = 16'($urandom); m[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      logic [15:0] exp_d;
      @(negedge clk);
      re = 1; raddr = 6'($urandom);
      we = $urandom_range(0, 1); waddr = ($urandom_range(0, 3) == 0) ? raddr : 6'($urandom); wdata = 16'($urandom);
      exp_d = m[raddr];
      if (we) m[waddr] = wdata;
      @(negedge clk); re = 0; we = 0;
      checks++; if (rdata != exp_d) begin failures++; $display("FAIL: addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
