// tb_npu: a small program on the NPU. Random int8 matrices A (16 x 6) and
// B (6 x 16) are loaded through the host port; the program runs MatMul with
// ReLU, MatMul with 2 x 2 max pooling, DATA MOV of the result into the feature
// memory and WTA over 10 classes of one result row. A second program copies
// the moved data back to the output memory so that it can be compared, a
// third holds an illegal type code, which must raise err, a fourth runs a
// 3 x 3 CONV of an image strip with 16 kernels, then a two-channel CONV
// chained through the accumulator, and a fifth runs two long
// MatMuls back to back. Results are compared with a reference model; the
// cycle counts check that the output FIFO lets the write-back of one
// instruction overlap the next.
module tb_npu;
  import anti_uav_pkg::*;
  localparam int K = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_we = 0, h_re = 0, start = 0, busy, done, err, wta_valid;
  logic [1:0] h_mem = 0;
  logic [8:0] h_addr = 0;
  logic [127:0] h_wdata = 0, h_rdata;
  logic [6:0] h_raddr = 0;
  logic [5:0] start_pc = 0;
  logic [3:0] wta_class;
  logic [31:0] n_mac, n_skip;
  int checks = 0, failures = 0;

  npu dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic hw(input int mem, input int addr, input logic [127:0] d);
    @(negedge clk); h_we = 1; h_mem = 2'(mem); h_addr = 9'(addr); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask
  task automatic hr(input int addr, output logic [127:0] d);
    @(negedge clk); h_re = 1; h_raddr = 7'(addr);
    @(negedge clk); h_re = 0; d = h_rdata;
  endtask
  task automatic run(input int pc, output int cycles);
    int t0;
    @(negedge clk); start = 1; start_pc = 6'(pc); t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
  endtask
  function automatic logic [63:0] mm(int fa, int wa, int k, int oa, int sh, bit relu, bit pool, bit last);
    return {last, 18'd0, pool, relu, 5'(sh), 7'(oa), 10'(k), 9'(wa), 9'(fa), OP_MATMUL};
  endfunction
  function automatic logic [63:0] dm(int src, int dst, int sa, int da, int len, bit last);
    return {last, 29'd0, 9'(len), 9'(da), 9'(sa), 2'(dst), 2'(src), OP_DATAMOV};
  endfunction
  function automatic int sat8(longint s);
    return (s > 127) ? 127 : (s < -128) ? -128 : int'(s);
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int A [16][K], B [K][16], Y [16][16], P [8][8], cyc, best;
    logic [127:0] d, word;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) for (int k = 0; k < K; k++) A[i][k] = ($urandom_range(0, 3) == 0) ? 0 : $signed(8'($urandom));
    for (int k = 0; k < K; k++) for (int j = 0; j < 16; j++) B[k][j] = $signed(8'($urandom));
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < 16; i++) word[8*i +: 8] = 8'(A[i][k]);
      hw(0, k, word);
      for (int j = 0; j < 16; j++) word[8*j +: 8] = 8'(B[k][j]);
      hw(1, 100 + k, word);
    end
    // program 0
    hw(3, 0, 128'(mm(0, 100, K, 0, 4, 1, 0, 0)));
    hw(3, 1, 128'(mm(0, 100, K, 20, 4, 0, 1, 0)));
    hw(3, 2, 128'(dm(2, 0, 0, 200, 16, 0)));
    hw(3, 3, 128'({1'b1, 48'd0, 5'd10, 7'd5, OP_WTA}));
    // program 10: copy back; program 20: illegal code then stop
    hw(3, 10, 128'(dm(0, 2, 200, 60, 16, 1)));
    hw(3, 20, 128'(64'(5)));
    hw(3, 21, 128'({1'b1, 60'd0, OP_WTA}));
    run(0, cyc);
    // cycle 0 start; MatMul 1: fetch, decode, K reads, drain, FIFO capture at
    // K + 4 = 10, next. MatMul 2 reaches its capture at 21 but waits for the
    // FIFO (16 rows, 11..26) and captures at 27. The DATA MOV reads the output
    // memory, so its decode waits for the second drain (28..43); it runs 17
    // cycles (45..61), then next, and WTA takes 5 cycles: done counted at 68.
    // Without the FIFO the write-back would add 16 cycles per MatMul.
    chk(cyc == 68, $sformatf("program cycles %0d", cyc));
    chk(!err && wta_valid, "program ok");
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
      longint s;
      s = 0;
      for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
      Y[i][j] = sat8(s >>> 4);
    end
    for (int i = 0; i < 16; i++) begin
      hr(i, d);
      for (int j = 0; j < 16; j++) chk($signed(d[8*j +: 8]) == ((Y[i][j] < 0) ? 0 : Y[i][j]), $sformatf("relu out %0d,%0d", i, j));
    end
    for (int i = 0; i < 8; i++) begin
      hr(20 + i, d);
      for (int j = 0; j < 8; j++) begin
        int m;
        m = Y[2*i][2*j];
        if (Y[2*i][2*j+1] > m) m = Y[2*i][2*j+1];
        if (Y[2*i+1][2*j] > m) m = Y[2*i+1][2*j];
        if (Y[2*i+1][2*j+1] > m) m = Y[2*i+1][2*j+1];
        chk($signed(d[8*j +: 8]) == m, $sformatf("pool out %0d,%0d", i, j));
      end
      chk(d[127:64] == '0, "pool upper half zero");
    end
    best = 0;
    for (int j = 1; j < 10; j++) if ((Y[5][j] < 0 ? 0 : Y[5][j]) > (Y[5][best] < 0 ? 0 : Y[5][best])) best = j;
    chk(wta_class == 4'(best), $sformatf("WTA class %0d exp %0d", wta_class, best));
    chk(n_mac == 2 * K * 256 && n_skip > 0, "MAC and zero-skip counters");
    run(10, cyc);
    for (int i = 0; i < 16; i++) begin
      logic [127:0] d2;
      hr(i, d); hr(60 + i, d2);
      chk(d == d2, "DATA MOV round trip");
    end
    run(20, cyc);
    chk(err, "illegal code flagged");
    // CONV: image rows at feature words 300 + 2y (pixels 0..15) and 301 + 2y
    // (pixels 16..31); tap (ky, kx) of the 16 kernels at weight word 400 + ky*KS + kx
    begin
      localparam int KS = 3;
      int IMG [KS][32], WK [KS][KS][16];
      for (int y = 0; y < KS; y++) begin
        for (int x = 0; x < 32; x++) IMG[y][x] = ($urandom_range(0, 4) == 0) ? 0 : $signed(8'($urandom));
        for (int i = 0; i < 16; i++) word[8*i +: 8] = 8'(IMG[y][i]);
        hw(0, 300 + 2 * y, word);
        for (int i = 0; i < 16; i++) word[8*i +: 8] = 8'(IMG[y][16 + i]);
        hw(0, 301 + 2 * y, word);
        for (int x = 0; x < KS; x++) begin
          for (int j = 0; j < 16; j++) begin
            WK[y][x][j] = $signed(8'($urandom));
            word[8*j +: 8] = 8'(WK[y][x][j]);
          end
          hw(1, 400 + y * KS + x, word);
        end
      end
      hw(3, 30, 128'({1'b1, 18'd0, 1'b0, 1'b1, 5'd5, 7'd80, 10'(KS), 9'd400, 9'd300, OP_CONV}));
      run(30, cyc);
      chk(!err, "CONV legal");
      // start, fetch, decode, KS x (2 loads + KS taps), drain, capture, FIFO drain (16), next
      chk(cyc == 1 + 2 + KS * (KS + 2) + 1 + 1 + 16 + 1, $sformatf("CONV cycles %0d", cyc));
      for (int ox = 0; ox < 16; ox++) begin
        hr(80 + ox, d);
        for (int j = 0; j < 16; j++) begin
          longint s;
          int e;
          s = 0;
          for (int y = 0; y < KS; y++) for (int x = 0; x < KS; x++) s += IMG[y][ox + x] * WK[y][x][j];
          e = sat8(s >>> 5);
          if (e < 0) e = 0;
          chk($signed(d[8*j +: 8]) == e, $sformatf("conv out x%0d k%0d", ox, j));
        end
      end
      // two-channel CONV: channel 0 as above, channel 1 at feature 320 and
      // weight 420; the first CONV is chained, so its sums stay in the array
      // and the second adds to them before the single write-back
      begin
        int IMG1 [KS][32], WK1 [KS][KS][16];
        for (int y = 0; y < KS; y++) begin
          for (int x = 0; x < 32; x++) IMG1[y][x] = $signed(8'($urandom));
          for (int i = 0; i < 16; i++) word[8*i +: 8] = 8'(IMG1[y][i]);
          hw(0, 320 + 2 * y, word);
          for (int i = 0; i < 16; i++) word[8*i +: 8] = 8'(IMG1[y][16 + i]);
          hw(0, 321 + 2 * y, word);
          for (int x = 0; x < KS; x++) begin
            for (int j = 0; j < 16; j++) begin
              WK1[y][x][j] = $signed(8'($urandom));
              word[8*j +: 8] = 8'(WK1[y][x][j]);
            end
            hw(1, 420 + y * KS + x, word);
          end
        end
        hw(3, 50, 128'({1'b0, 17'd0, 1'b1, 1'b0, 1'b1, 5'd6, 7'd96, 10'(KS), 9'd400, 9'd300, OP_CONV}));
        hw(3, 51, 128'({1'b1, 17'd0, 1'b0, 1'b0, 1'b1, 5'd6, 7'd96, 10'(KS), 9'd420, 9'd320, OP_CONV}));
        run(50, cyc);
        // chained CONV ends without write-back; the second one as a single CONV
        chk(cyc == 1 + (2 + KS * (KS + 2) + 1 + 1 + 1) + (2 + KS * (KS + 2) + 1 + 1 + 16 + 1),
            $sformatf("two-channel CONV cycles %0d", cyc));
        for (int ox = 0; ox < 16; ox++) begin
          hr(96 + ox, d);
          for (int j = 0; j < 16; j++) begin
            longint s;
            int e;
            s = 0;
            for (int y = 0; y < KS; y++) for (int x = 0; x < KS; x++)
              s += IMG[y][ox + x] * WK[y][x][j] + IMG1[y][ox + x] * WK1[y][x][j];
            e = sat8(s >>> 6);
            if (e < 0) e = 0;
            chk($signed(d[8*j +: 8]) == e, $sformatf("2-ch conv out x%0d k%0d", ox, j));
          end
        end
      end
    end
    // two long MatMuls back to back: the first FIFO drain (16 cycles) is
    // hidden under the second MatMul's K = 20 reads
    hw(3, 40, 128'(mm(0, 100, 20, 100, 0, 0, 0, 0)));
    hw(3, 41, 128'(mm(0, 100, 20, 110, 0, 0, 0, 1)));
    run(40, cyc);
    chk(cyc == 1 + 2 * (20 + 5) + 16, $sformatf("overlapped MatMul cycles %0d", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
