// tb_npu_nonlinear: random 32-bit partial sums with random shifts, with and
// without ReLU, against a reference shift / clamp / saturate.
module tb_npu_nonlinear;
  localparam int C = 16;
  logic signed [31:0] x [C];
  logic [4:0] shift;
  logic relu;
  logic signed [7:0] y [C];
  int checks = 0, failures = 0;
  npu_nonlinear #(.C(C)) dut (.*);
  initial begin
    for (int t = 0; t < 200; t++) begin
      shift = 5'($urandom_range(0, 12)); relu = $urandom_range(0, 1);
      for (int j = 0; j < C; j++) x[j] = $signed($urandom) >>> $urandom_range(8, 24);
      #1;
      for (int j = 0; j < C; j++) begin
        longint s;
        s = longint'(x[j]) >>> shift;
        if (relu && s < 0) s = 0;
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        checks++; if (y[j] != s) begin failures++; $display("FAIL: x %0d >> %0d relu %0d: %0d", x[j], shift, relu, y[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
