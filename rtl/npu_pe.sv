// npu_pe: one processing engine of the NPU's 16 x 16 array.
//
// Output-stationary multiply-accumulate: the partial sum stays in the PE while
// a feature a and a weight b arrive every enabled cycle; psum += a * b on
// signed 8-bit operands into a 32-bit accumulator. clr starts a new output
// (psum = 0). Zero skipping: when either operand is zero the multiplier and
// adder are not used and psum keeps its value (skip pulses), which saves the
// switching power of a useless MAC.
//
// Timing: psum is updated at the clock edge of the enabled cycle.
// Follows the paper (Fig. 5): zero-skip, multiplier, adder, Psum register.
// The operand and accumulator widths are this design's choice.
module npu_pe (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  logic signed [7:0] a,
  input  logic signed [7:0] b,
  output logic signed [31:0] psum,
  output logic              skip
);

  wire zero = (a == '0) || (b == '0);
  assign skip = en && zero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             psum <= '0;
    else if (clr)           psum <= '0;
    else if (en && !zero)   psum <= psum + 32'(a * b);
  end

endmodule
