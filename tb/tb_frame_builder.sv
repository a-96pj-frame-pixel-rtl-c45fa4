// tb_frame_builder: self-checking test of the frame builder on a 16 x 8 frame.
// Random events are written, the scan is checked row by row against a
// reference bitmap kept by the testbench, the scan rate (one row per cycle)
// is measured, the memory must be empty for the next frame, and an event that
// hits the row being cleared must survive into the next frame.
module tb_frame_builder;
  import anti_uav_pkg::*;
  localparam int W = 16, H = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, ev_valid, frame_start, row_valid, row_ready, row_last;
  logic [31:0] frame_period;
  aer_event_t ev;
  coord_t row_idx;
  logic [W-1:0] row_data;
  int checks = 0, failures = 0;

  frame_builder #(.W(W), .H(H)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [W-1:0] ref_img [H];

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, nrows;
    en = 0; ev_valid = 0; ev = '0; row_ready = 1; frame_period = 32'd1000;
    for (int r = 0; r < H; r++) ref_img[r] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk);
    // frame 1: random events, timer stopped
    for (int i = 0; i < 30; i++) begin
      ev_valid <= 1; ev.x <= 9'($urandom_range(0, W-1)); ev.y <= 9'($urandom_range(0, H-1)); ev.pol <= 1'b1;
      @(posedge clk);
      ref_img[ev.y][ev.x] = 1'b1;
    end
    // out-of-range event is ignored
    ev.x <= 9'(W + 3); ev.y <= 9'd1; @(posedge clk);
    ev_valid <= 0;
    @(posedge clk);
    chk(!row_valid, "no scan while disabled");
    frame_period <= 32'd5; en <= 1;
    wait (frame_start); @(posedge clk); #1;
    t0 = $time / 10; nrows = 0;
    while (nrows < H) begin
      chk(row_valid, "row offered every cycle");
      chk(row_idx == 9'(nrows), $sformatf("row index %0d", nrows));
      chk(row_data == ref_img[nrows], $sformatf("row %0d data %h exp %h", nrows, row_data, ref_img[nrows]));
      chk(row_last == (nrows == H-1), "row_last");
      // event into the row being cleared now: must appear next frame
      if (nrows == 3) begin ev_valid = 1; ev.x = 9'd2; ev.y = 9'd3; end
      @(posedge clk); #1;
      ev_valid = 0;
      nrows++;
    end
    chk(($time / 10) - t0 == H, "H cycles per frame scan");
    en <= 0;
    @(posedge clk); #1;
    chk(dut.mem[3] == 16'h0004, "event during clear kept");
    for (int r = 0; r < H; r++) if (r != 3) chk(dut.mem[r] == '0, "memory cleared");
    // back-pressure: scan holds while row_ready is low
    row_ready <= 0; en <= 1;
    wait (frame_start); @(posedge clk); #1;
    repeat (3) begin chk(row_valid && row_idx == 0, "held by row_ready"); @(posedge clk); #1; end
    chk(row_data == '0, "row 0 empty");
    row_ready = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
