// tb_rpu: the Region Proposal Unit with 8 PEs.
// Frame mode: two objects (one built from two slices that a third slice
// merges) and one small blob; at end of frame the small one is dropped and
// the unit enters event mode. Event mode: events update an RP after more
// than TH matches; unmatched events are ignored; hold delays the periodic
// return to frame mode. Then PE overflow (slice dropped), a frame without
// objects (stays in frame mode), and the two-cycle per input rate.
module tb_rpu;
  import anti_uav_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  coord_t nbr_dx = 1, nbr_dy = 1, ev_nbr = 4, e_x, e_y;
  logic [SIZE_W-1:0] valid_size = 9;
  logic [31:0] refresh_period = 200;
  logic hold = 0;
  logic [TH_W-1:0] th [N];
  logic s_valid, s_ready, s_eof, e_valid, e_ready;
  slice_t s_slice;
  rpu_mode_e mode;
  logic [N-1:0] occupied, upd, freed;
  rp_t rps [N];
  logic [15:0] n_merge, n_drop, n_switch_event, n_switch_frame;
  int checks = 0, failures = 0;

  rpu #(.N(N)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic slice(input int r, input int a, input int b, input bit eof = 0);
    @(negedge clk);
    s_valid = 1; s_slice = '{row: 9'(r), c1: 9'(a), c2: 9'(b)}; s_eof = eof;
    while (!s_ready) @(negedge clk);
    @(posedge clk); #1;
    s_valid = 0; s_eof = 0;
  endtask
  task automatic event_in(input int x, input int y);
    @(negedge clk);
    e_valid = 1; e_x = 9'(x); e_y = 9'(y);
    while (!e_ready) @(negedge clk);
    @(posedge clk); #1;
    e_valid = 0;
  endtask
  function automatic bit box_is(int i, int x0, int x1, int y0, int y1);
    return rps[i].box == '{xmin: 9'(x0), xmax: 9'(x1), ymin: 9'(y0), ymax: 9'(y1)};
  endfunction

  int n_upd = 0;
  always @(posedge clk) n_upd += $countones(upd);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0;
    for (int i = 0; i < N; i++) th[i] = 8'd1;
    s_valid = 0; s_eof = 0; s_slice = '0; e_valid = 0; e_x = 0; e_y = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    chk(mode == MODE_FRAME, "starts in frame mode");
    slice(10, 20, 24); slice(11, 21, 23); slice(12, 20, 22);
    slice(30, 40, 41); slice(30, 46, 47);
    slice(31, 40, 47);
    slice(50, 5, 6);
    repeat (2) @(posedge clk); #1;
    chk(occupied == 8'b0000_0111, $sformatf("occupied %b", occupied));
    chk(box_is(0, 20, 24, 10, 12) && rps[0].size == 11, $sformatf("RP0 size %0d", rps[0].size));
    chk(box_is(1, 40, 47, 30, 31) && rps[1].size == 12, "RP1 merged");
    chk(box_is(2, 5, 6, 50, 50) && rps[2].size == 2, "RP2 small blob reuses freed PE");
    chk(n_merge == 1, "one merge");
    slice(0, 0, 0, 1);
    repeat (3) @(posedge clk); #1;
    chk(occupied == 8'b0000_0011, "small RP freed at end of frame");
    chk(mode == MODE_EVENT && n_switch_event == 1, "switch to event mode");
    // event mode
    event_in(100, 100);
    event_in(25, 13);
    repeat (2) @(posedge clk); #1;
    chk(box_is(0, 20, 24, 10, 12) && n_upd == 0, "no update before TH");
    event_in(19, 9);
    repeat (2) @(posedge clk); #1;
    chk(n_upd == 1 && box_is(0, 19, 25, 9, 13), "RP* after TH+1 events");
    chk(occupied == 8'b0000_0011, "unmatched event ignored");
    // event rate: two cycles per event
    t0 = $time;
    for (int i = 0; i < 6; i++) event_in(44, 31);
    chk(($time - t0) / 10 <= 12, $sformatf("event rate %0d cycles for 6", ($time - t0) / 10));
    // hold keeps event mode
    hold = 1;
    repeat (250) @(posedge clk); #1;
    chk(mode == MODE_EVENT, "hold keeps event mode");
    hold = 0;
    repeat (3) @(posedge clk); #1;
    chk(mode == MODE_FRAME && occupied == '0 && n_switch_frame == 1, "refresh to frame mode");
    // overflow: nine separate slices for eight PEs, back to back
    t0 = $time;
    for (int i = 0; i < 9; i++) slice(2 * i, 3 * i, 3 * i);
    chk(($time - t0) / 10 inside {[17:18]}, $sformatf("slice rate %0d cycles for 9", ($time - t0) / 10));
    repeat (2) @(posedge clk); #1;
    chk(n_drop == 1 && occupied == '1, "overflow drop");
    slice(0, 0, 0, 1);
    repeat (3) @(posedge clk); #1;
    chk(mode == MODE_FRAME && occupied == '0, "no object: stay in frame mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
