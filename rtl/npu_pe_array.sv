// npu_pe_array: R x C array of npu_pe with output-stationary dataflow.
//
// Row i of the array receives feature a[i] and column j receives weight b[j];
// PE (i, j) accumulates a[i] * b[j], so K enabled cycles compute the R x C
// product of an R x K feature matrix and a K x C weight matrix, one k per
// cycle. The operands are broadcast along rows and columns. n_skip counts the
// zero-skipped MACs of the current cycle.
//
// Timing: one k per cycle; results in psum the cycle after the last enable.
// Follows the paper: 16 x 16 PEs, output-stationary, zero skipping. Own
// choice: broadcast (not systolic) operand distribution.
module npu_pe_array #(
  parameter int unsigned R = 16,
  parameter int unsigned C = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               en,
  input  logic signed [7:0]  a [R],
  input  logic signed [7:0]  b [C],
  output logic signed [31:0] psum [R][C],
  output logic [$clog2(R*C+1)-1:0] n_skip
);

  logic [R*C-1:0] skip;

  for (genvar i = 0; i < R; i++) begin : g_row
    for (genvar j = 0; j < C; j++) begin : g_col
      npu_pe u_pe (
        .clk, .rst_n, .clr, .en, .a(a[i]), .b(b[j]), .psum(psum[i][j]),
        .skip(skip[i*C+j])
      );
    end
  end

  always_comb begin
    n_skip = '0;
    for (int k = 0; k < R * C; k++) n_skip += $bits(n_skip)'(skip[k]);
  end

endmodule
