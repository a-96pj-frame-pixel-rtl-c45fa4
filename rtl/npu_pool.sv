// npu_pool: the NPU's pooling unit, 2 x 2 max pooling of two result rows.
//
// Given rows r0 and r1 of C signed 8-bit values, output element j is the
// maximum of r0[2j], r0[2j+1], r1[2j], r1[2j+1], for j < C/2.
// Purely combinational.
// The paper names the unit; max pooling with a 2 x 2 window is this design's
// choice.
module npu_pool #(
  parameter int unsigned C = 16
) (
  input  logic signed [7:0] r0 [C],
  input  logic signed [7:0] r1 [C],
  output logic signed [7:0] y  [C/2]
);

  function automatic logic signed [7:0] smax(input logic signed [7:0] p,
                                             input logic signed [7:0] q);
    return (p > q) ? p : q;
  endfunction

  always_comb begin
    for (int j = 0; j < C / 2; j++)
      y[j] = smax(smax(r0[2*j], r0[2*j+1]), smax(r1[2*j], r1[2*j+1]));
  end

endmodule
