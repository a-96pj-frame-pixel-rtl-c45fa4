// tb_isp: an 8 x 8 patch is cut from a synthetic 40 x 30 gray frame, once
// from a ROI larger than the patch (shrinking) and once from a smaller one
// (enlarging, which exercises the input stall and repeated line write-out).
// Every patch pixel is compared with a reference computed from the image
// formula: nearest-neighbour source pixel, 3-tap causal median. Each run
// starts in the middle of a frame, whose rest must be ignored.
module tb_isp;
  import anti_uav_pkg::*;
  localparam int PW = 8, PH = 8, IW = 40, IH = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, pix_valid = 0, pix_ready, out_valid, busy, done;
  box_t roi = '0;
  coord_t pix_x = 0, pix_y = 0;
  logic [7:0] pix = 0, out_data;
  logic [$clog2(PW*PH)-1:0] out_addr;
  int checks = 0, failures = 0;

  isp #(.PW(PW), .PH(PH)) dut (.*);

  function automatic logic [7:0] img(int x, int y);
    if ((x * 3 + y * 5) % 17 == 0) return 8'd255;     // salt noise
    return 8'((x * 7 + y * 13) % 200);
  endfunction
  function automatic logic [7:0] med3(logic [7:0] a, logic [7:0] b, logic [7:0] c);
    logic [7:0] s [3];
    s = '{a, b, c}; s.sort();
    return s[1];
  endfunction

  logic [7:0] patch [PW*PH];
  int nw = 0;
  always @(posedge clk) if (out_valid) begin patch[out_addr] <= out_data; nw++; end

  task automatic run(input int x0, input int x1, input int y0, input int y1);
    int w, h;
    w = x1 - x0 + 1; h = y1 - y0 + 1; nw = 0;
    @(negedge clk); roi = '{xmin: 9'(x0), xmax: 9'(x1), ymin: 9'(y0), ymax: 9'(y1)}; start = 1;
    @(negedge clk); start = 0;
    // the tail of a frame that began before start must be ignored
    for (int y = y0 + 1; y < IH; y++)
      for (int x = (y == y0 + 1) ? x0 + 2 : 0; x < IW; x++) begin
        pix_valid = 1; pix_x = 9'(x); pix_y = 9'(y); pix = 8'($urandom);
        @(posedge clk);
        while (!pix_ready) @(posedge clk);
        #1;
      end
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) begin
        pix_valid = 1; pix_x = 9'(x); pix_y = 9'(y); pix = img(x, y);
        @(posedge clk);
        while (!pix_ready) @(posedge clk);
        #1;
      end
    pix_valid = 0;
    repeat (PW + 4) @(negedge clk);
    checks++;
    if (nw != PW * PH || busy) begin failures++; $display("FAIL: %0d writes", nw); end
    for (int v = 0; v < PH; v++)
      for (int u = 0; u < PW; u++) begin
        int p, q, xs;
        logic [7:0] e, m0, m1;
        p = (u * w) >> 3; q = (v * h) >> 3; xs = x0 + p;
        m0 = (p == 0) ? img(xs, y0 + q) : img(xs - 1, y0 + q);
        m1 = (p == 0) ? img(xs, y0 + q) : (p == 1) ? img(xs - 1, y0 + q) : img(xs - 2, y0 + q);
        e = med3(img(xs, y0 + q), m0, m1);
        checks++;
        if (patch[v * PW + u] != e) begin
          failures++;
          $display("FAIL: roi %0dx%0d (%0d,%0d) got %0d exp %0d", w, h, u, v, patch[v*PW+u], e);
        end
      end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit done_seen = 0;
  always @(posedge clk) if (done) done_seen <= 1;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(5, 24, 3, 18);
    run(10, 14, 10, 13);
    run(30, 39, 20, 29);
    checks++; if (!done_seen) begin failures++; $display("FAIL: no done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
