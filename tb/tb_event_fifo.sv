// tb_event_fifo: random pushes and pops against a queue model. Checks the
// order and values of popped entries, the full and valid flags every cycle,
// refusal of pushes when full, and flush.
module tb_event_fifo;
  localparam int W = 18, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush = 0, push = 0, pop = 0, full, valid;
  logic [W-1:0] din = 0, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  event_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_full = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      chk(full == (q.size() == D), $sformatf("full flag, %0d queued", q.size()));
      chk(valid == (q.size() != 0), "valid flag");
      if (valid) chk(dout == q[0], "head entry");
      if (full) n_full++;
      flush = (t % 500) == 499;
      push  = $urandom_range(0, 2) != 0;
      pop   = valid && ($urandom_range(0, 1) == 0);
      din   = W'($urandom);
      @(posedge clk);
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push && !full) q.push_back(din);
      end
    end
    chk(n_full > 0, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
