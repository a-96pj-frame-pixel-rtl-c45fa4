// tb_noise_filter: random 24-pixel rows of a 10-row frame, with a short idle
// gap and back-pressure, checked against a reference 8-neighbour filter.
module tb_noise_filter;
  import anti_uav_pkg::*;
  localparam int W = 24, H = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  coord_t in_idx, out_idx;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  noise_filter #(.W(W)) dut (.*);

  logic [W-1:0] img [H];
  function automatic logic [W-1:0] ref_row(int r);
    logic [W-1:0] o;
    o = '0;
    for (int c = 0; c < W; c++) begin
      bit any = 0;
      for (int dr = -1; dr <= 1; dr++) for (int dc = -1; dc <= 1; dc++)
        if (!(dr == 0 && dc == 0) && r+dr >= 0 && r+dr < H && c+dc >= 0 && c+dc < W)
          if (img[r+dr][c+dc]) any = 1;
      o[c] = img[r][c] & any;
    end
    return o;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int got = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_idx != 9'(got) || out_data != ref_row(got) || out_last != (got == H-1)) begin
      failures++;
      $display("FAIL row %0d: idx %0d data %h exp %h", got, out_idx, out_data, ref_row(got));
    end
    got++;
  end
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    in_valid = 0; in_last = 0; in_idx = '0; in_data = '0;
    for (int r = 0; r < H; r++) img[r] = W'($urandom) & W'($urandom);
    img[4] = 24'h000100; img[5] = '0; img[3] = '0;   // isolated pixel: must vanish
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < H; r++) begin
      in_valid <= 1; in_idx <= 9'(r); in_data <= img[r]; in_last <= (r == H-1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (r == 5) begin in_valid <= 0; repeat (2) @(posedge clk); end
    end
    in_valid <= 0;
    repeat (40) @(posedge clk);
    checks++; if (got != H) begin failures++; $display("FAIL: %0d rows out", got); end
    checks++; if (ref_row(4) != '0) begin failures++; $display("FAIL: reference"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
