// npu_sram: synchronous simple dual-port memory (one write port, one read
// port), written as an array so that synthesis maps it to a memory macro.
// Used for the NPU's weight, feature, output and instruction memories and for
// the FOTU trajectory memory.
//
// Interface: we/waddr/wdata write at the clock edge; re/raddr read, rdata is
// valid in the next cycle (registered output). A read and a write of the same
// address in one cycle return the old contents.
//
// The paper gives the memories' sizes only; the port arrangement is this
// design's choice.
module npu_sram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
