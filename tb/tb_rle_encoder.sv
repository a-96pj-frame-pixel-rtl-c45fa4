// tb_rle_encoder: random 20-pixel rows (plus all-ones and all-zero rows) are
// encoded; every slice is compared with a reference run list, the
// end-of-frame token must follow the last slice, and with out_ready high the
// encoder must take W cycles per row.
module tb_rle_encoder;
  import anti_uav_pkg::*;
  localparam int W = 20, H = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_eof;
  coord_t in_idx;
  logic [W-1:0] in_data;
  slice_t out_slice;
  int checks = 0, failures = 0;

  rle_encoder #(.W(W)) dut (.*);

  slice_t exp_q[$];
  logic [W-1:0] img [H];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int eofs = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_eof) begin
      eofs++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: eof before all slices"); end
    end else if (exp_q.size() == 0 || out_slice != exp_q[0]) begin
      failures++; $display("FAIL: slice r%0d %0d-%0d", out_slice.row, out_slice.c1, out_slice.c2);
    end else void'(exp_q.pop_front());
  end

  initial begin
    int t0, t1;
    in_valid = 0; in_last = 0; in_idx = '0; in_data = '0; out_ready = 1;
    for (int r = 0; r < H; r++) img[r] = W'($urandom);
    img[1] = '1; img[2] = '0; img[3] = 20'h80001;
    for (int r = 0; r < H; r++) begin
      int s; s = -1;
      for (int c = 0; c <= W; c++) begin
        bit b; b = (c < W) ? img[r][c] : 1'b0;
        if (b && s < 0) s = c;
        if (!b && s >= 0) begin exp_q.push_back('{row: 9'(r), c1: 9'(s), c2: 9'(c-1)}); s = -1; end
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); t0 = $time / 10;
    for (int r = 0; r < H; r++) begin
      in_valid <= 1; in_idx <= 9'(r); in_data <= img[r]; in_last <= (r == H-1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 0;
    wait (eofs == 1); t1 = $time / 10;
    checks++;
    if (t1 - t0 > H * (W + 1) + 4 || t1 - t0 < H * W) begin
      failures++; $display("FAIL: %0d cycles for %0d rows", t1 - t0, H);
    end
    // second frame with back-pressure
    out_ready = 0;
    exp_q.push_back('{row: 9'd0, c1: 9'd3, c2: 9'd5});
    in_valid <= 1; in_idx <= 0; in_data <= 20'h38; in_last <= 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    in_valid <= 0;
    repeat (30) @(posedge clk);
    checks++; if (!out_valid || out_eof) begin failures++; $display("FAIL: held slice"); end
    out_ready = 1;
    repeat (W + 5) @(posedge clk);
    checks++; if (eofs != 2 || exp_q.size() != 0) begin failures++; $display("FAIL: second frame eofs=%0d q=%0d", eofs, exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
