// tb_npu_pe_array: a 4 x 4 array computes random 4 x K by K x 4 products
// (K = 7, sparse operands); every partial sum and the per-cycle skip count are
// compared with a reference.
module tb_npu_pe_array;
  localparam int R = 4, C = 4, K = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, en = 0;
  logic signed [7:0] a [R], b [C];
  logic signed [31:0] psum [R][C];
  logic [$clog2(R*C+1)-1:0] n_skip;
  int checks = 0, failures = 0;
  npu_pe_array #(.R(R), .C(C)) dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int A [R][K], B [K][C], ref_c [R][C];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) A[i][k] = ($urandom_range(0, 2) == 0) ? 0 : $signed(8'($urandom));
      for (int k = 0; k < K; k++) for (int j = 0; j < C; j++) B[k][j] = ($urandom_range(0, 2) == 0) ? 0 : $signed(8'($urandom));
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int k = 0; k < K; k++) begin
        int zs;
        zs = 0;
        for (int i = 0; i < R; i++) a[i] = 8'(A[i][k]);
        for (int j = 0; j < C; j++) b[j] = 8'(B[k][j]);
        for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) if (A[i][k] == 0 || B[k][j] == 0) zs++;
        en = 1; #1;
        checks++; if (n_skip != zs) begin failures++; $display("FAIL: skip %0d exp %0d", n_skip, zs); end
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
        ref_c[i][j] = 0;
        for (int k = 0; k < K; k++) ref_c[i][j] += A[i][k] * B[k][j];
        checks++;
        if (psum[i][j] != ref_c[i][j]) begin failures++; $display("FAIL: C[%0d][%0d]", i, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
