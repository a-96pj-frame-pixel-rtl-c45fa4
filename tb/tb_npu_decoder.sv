// tb_npu_decoder: instructions assembled field by field are decoded back;
// the legal flag is checked for all eight type codes.
module tb_npu_decoder;
  import anti_uav_pkg::*;
  logic [63:0] instr;
  npu_dec_t dec;
  int checks = 0, failures = 0;
  npu_decoder dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    for (int t = 0; t < 50; t++) begin
      logic [8:0] fa, wa; logic [9:0] k; logic [6:0] oa; logic [4:0] sh; logic rl, pl, last;
      fa = 9'($urandom); wa = 9'($urandom); k = 10'($urandom); oa = 7'($urandom);
      sh = 5'($urandom); rl = 1'($urandom); pl = 1'($urandom); last = 1'($urandom);
      instr = {last, 18'd0, pl, rl, sh, oa, k, wa, fa, OP_MATMUL};
      #1;
      chk(dec.op == OP_MATMUL && dec.legal && dec.faddr == fa && dec.waddr == wa && dec.k == k
          && dec.oaddr == oa && dec.shift == sh && dec.relu == rl && dec.pool == pl && !dec.chain && dec.last == last, "matmul fields");
    end
    instr = {1'b0, 17'd0, 1'b1, 1'b0, 1'b1, 5'd3, 7'd9, 10'd5, 9'd40, 9'd300, OP_CONV}; #1;
    chk(dec.chain && !dec.pool && dec.op == OP_CONV && dec.legal && dec.k[3:0] == 5 && dec.faddr == 300 && dec.waddr == 40 && dec.oaddr == 9 && dec.shift == 3 && dec.relu, "conv fields");
    instr = {1'b1, 29'd0, 9'd7, 9'd100, 9'd200, 2'd2, 2'd0, OP_DATAMOV}; #1;
    chk(dec.op == OP_DATAMOV && dec.src == 0 && dec.dst == 2 && dec.saddr == 200 && dec.daddr == 100 && dec.len == 7 && dec.last, "data mov fields");
    instr = {49'd0, 5'd10, 7'd33, OP_WTA}; #1;
    chk(dec.op == OP_WTA && dec.wta_row == 33 && dec.ncls == 10 && !dec.last, "wta fields");
    for (int c = 0; c < 8; c++) begin
      instr = 64'(c); #1;
      chk(dec.legal == (c inside {0, 1, 2, 3, 4}), $sformatf("legal %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
