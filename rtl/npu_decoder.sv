// npu_decoder: decodes one 64-bit NPU instruction.
//
// Bits [2:0] give the operation type (CONV, FC, MatMul, DATA MOV, WTA, in the
// order the paper's instruction table lists them, encoded 0..4); the other
// bits configure the NPU's sub-blocks. The field layout is given in
// anti_uav_pkg (npu_dec_t). CONV uses the MatMul fields, with the kernel size
// in the low four bits of K. Codes 5..7 are not legal.
// Purely combinational.
module npu_decoder
  import anti_uav_pkg::*;
(
  input  logic [63:0] instr,
  output npu_dec_t    dec
);

  always_comb begin
    dec         = '0;
    dec.op      = npu_op_e'(instr[2:0]);
    dec.legal   = instr[2:0] inside {OP_CONV, OP_FC, OP_MATMUL, OP_DATAMOV, OP_WTA};
    dec.last    = instr[63];
    dec.faddr   = instr[11:3];
    dec.waddr   = instr[20:12];
    dec.k       = instr[30:21];
    dec.oaddr   = instr[37:31];
    dec.shift   = instr[42:38];
    dec.relu    = instr[43];
    dec.pool    = instr[44];
    dec.chain   = instr[45];
    dec.src     = instr[4:3];
    dec.dst     = instr[6:5];
    dec.saddr   = instr[15:7];
    dec.daddr   = instr[24:16];
    dec.len     = instr[33:25];
    dec.wta_row = instr[9:3];
    dec.ncls    = instr[14:10];
  end

endmodule
