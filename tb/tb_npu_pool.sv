// tb_npu_pool: random signed rows, 2 x 2 max pooling against a reference.
module tb_npu_pool;
  localparam int C = 16;
  logic signed [7:0] r0 [C], r1 [C], y [C/2];
  int checks = 0, failures = 0;
  npu_pool #(.C(C)) dut (.*);
  initial begin
    for (int t = 0; t < 100; t++) begin
      for (int j = 0; j < C; j++) begin r0[j] = 8'($urandom); r1[j] = 8'($urandom); end
      #1;
      for (int j = 0; j < C / 2; j++) begin
        int m;
        m = r0[2*j];
        if (r0[2*j+1] > m) m = r0[2*j+1];
        if (r1[2*j] > m) m = r1[2*j];
        if (r1[2*j+1] > m) m = r1[2*j+1];
        checks++; if (y[j] != m) begin failures++; $display("FAIL: %0d", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
