// tb_rp_monitor: a sequence of RP updates with hand-computed expectations of
// TH* = Bias + Wa*Area + Ws*Speed (Wa = 1.0, Ws = 2.0, Bias = 4), the fast
// decision (speed > 3), the 4-pixel trajectory step, the request/ack
// handshake, the 255 clamp and the reset of the monitor when its PE is freed.
module tb_rp_monitor;
  import anti_uav_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] bias = 4, wa = 16, ws = 32;
  logic [17:0] th_a = 50;
  logic [CW:0] th_s = 3;
  coord_t step = 4;
  logic [13:0] stamp = 14'd77;
  logic upd = 0, freed = 0, fast, req, ack = 0;
  rp_t rp;
  logic [TH_W-1:0] th;
  traj_point_t point;
  int checks = 0, failures = 0;

  rp_monitor dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s (th=%0d fast=%0d req=%0d)", msg, th, fast, req); end
  endtask
  task automatic update(input int x0, input int x1, input int y0, input int y1);
    rp = '{id: 5'd0, box: '{xmin: 9'(x0), xmax: 9'(x1), ymin: 9'(y0), ymax: 9'(y1)}, size: 7'd9};
    @(negedge clk); upd = 1; @(negedge clk); upd = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rp = '0;
    repeat (2) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    chk(th == 4, "initial TH = bias");
    update(10, 13, 10, 12);      // area 12, centre (11,11)
    chk(th == 16 && !fast && !req, "first update");
    update(12, 15, 10, 12);      // centre moves by 2
    chk(th == 20 && !fast && !req, "slow move");
    update(20, 23, 10, 12);      // moves by 8: fast
    chk(th == 32 && fast && req && point.x == 21 && point.y == 11 && point.stamp == 77, "fast, first point");
    update(22, 25, 10, 12);      // moves 2 < step: no new point, old one still pending
    chk(th == 20 && fast && req && point.x == 21, "pending point kept, no new point");
    @(negedge clk); ack = 1; @(negedge clk); ack = 0;
    chk(!req, "ack clears request");
    update(27, 30, 10, 12);      // centre 28: 7 > 4 from last recorded point
    chk(th == 26 && req && point.x == 28, "second point after step");
    update(27, 30, 10, 12);      // unchanged
    chk(th == 26, "unchanged RP keeps TH");
    update(0, 99, 0, 99);
    chk(th == 255, "clamp to 255");
    @(negedge clk); freed = 1; @(negedge clk); freed = 0;
    chk(th == 4 && !fast && !req, "freed resets monitor");
    update(100, 103, 100, 102);
    chk(!fast && !req, "new object starts slow");
    th_a = 5;
    update(100, 110, 100, 110);  // area 12 -> 121: dArea > th_a
    chk(fast && req, "fast by area change");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
