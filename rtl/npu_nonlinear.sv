// npu_nonlinear: the NPU's non-linear function unit, applied to one row of
// accumulator results.
//
// Each 32-bit partial sum is shifted right arithmetically by `shift`
// (requantisation), passed through ReLU when relu = 1, and saturated to a
// signed 8-bit value.
// Purely combinational.
// The paper names the unit and shows ReLU in its pipeline; the requantising
// shift and saturation are this design's choices.
module npu_nonlinear #(
  parameter int unsigned C = 16
) (
  input  logic signed [31:0] x [C],
  input  logic [4:0]         shift,
  input  logic               relu,
  output logic signed [7:0]  y [C]
);

  always_comb begin
    for (int j = 0; j < C; j++) begin
      logic signed [31:0] s;
      s = x[j] >>> shift;
      if (relu && s < 0) s = 0;
      if (s > 127)       y[j] = 8'sd127;
      else if (s < -128) y[j] = -8'sd128;
      else               y[j] = s[7:0];
    end
  end

endmodule
