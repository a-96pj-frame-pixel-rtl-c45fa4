// tb_rpu_pe: directed test of one RPU PE. Frame mode: neighbourhood matches
// and misses of slices (including the guard against coordinate wrap at 0),
// load and clear. Event mode: with TH = 2 the RP must be replaced by the box
// of the matched events on the third hit (counter > TH), with upd pulsing.
module tb_rpu_pe;
  import anti_uav_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  rpu_mode_e mode;
  coord_t nbr_dx, nbr_dy, ev_nbr, cmd_x, cmd_y;
  logic [TH_W-1:0] th, cnt;
  logic in_valid, occupied, status, upd;
  slice_t in_slice;
  pe_cmd_e cmd;
  rp_t cmd_rp, rp;
  int checks = 0, failures = 0;

  rpu_pe #(.ID(5'd3)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic bc(input int r, input int a, input int b, input bit exp);
    in_valid <= 1; in_slice <= '{row: 9'(r), c1: 9'(a), c2: 9'(b)};
    @(posedge clk); in_valid <= 0; #1;
    chk(status == exp, $sformatf("match r%0d %0d-%0d exp %0d", r, a, b, exp));
  endtask
  task automatic command(input pe_cmd_e c, input int x = 0, input int y = 0);
    cmd <= c; cmd_x <= 9'(x); cmd_y <= 9'(y);
    @(posedge clk); cmd <= PE_NOP; #1;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mode = MODE_FRAME; nbr_dx = 1; nbr_dy = 1; ev_nbr = 4; th = 2; in_valid = 0;
    in_slice = '0; cmd = PE_NOP; cmd_rp = '0; cmd_x = 0; cmd_y = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    bc(5, 10, 12, 0);                       // empty PE never matches
    cmd_rp <= '{id: 5'd0, box: '{xmin: 9'd10, xmax: 9'd14, ymin: 9'd5, ymax: 9'd5}, size: 7'd5};
    command(PE_LOAD);
    chk(occupied && rp.box.xmin == 10 && rp.size == 5 && rp.id == 3, "load");
    bc(6, 15, 20, 1);                       // diagonal neighbour
    bc(6, 16, 20, 0);                       // two columns away
    bc(7, 10, 12, 0);                       // two rows away
    bc(4, 0, 9, 1);                         // row above, touching left
    bc(5, 0, 8, 0);
    // wrap guard: RP at the origin
    cmd_rp <= '{id: 5'd0, box: '{xmin: 9'd0, xmax: 9'd1, ymin: 9'd0, ymax: 9'd0}, size: 7'd2};
    command(PE_LOAD);
    bc(1, 2, 2, 1);
    bc(0, 500, 511, 0);
    // event mode
    cmd_rp <= '{id: 5'd0, box: '{xmin: 9'd50, xmax: 9'd60, ymin: 9'd50, ymax: 9'd60}, size: 7'd40};
    command(PE_LOAD);
    mode = MODE_EVENT;
    bc(64, 64, 64, 1);                      // within dL = 4
    bc(65, 55, 55, 0);
    command(PE_HIT, 52, 58);
    chk(cnt == 1 && !upd, "hit 1");
    command(PE_HIT, 63, 51);
    chk(cnt == 2 && !upd && rp.box.xmin == 50, "hit 2 no update yet");
    command(PE_HIT, 57, 62);
    chk(upd, "update pulse on 3rd hit");
    chk(rp.box == '{xmin: 9'd52, xmax: 9'd63, ymin: 9'd51, ymax: 9'd62}, "RP* box");
    chk(rp.size == 3 && cnt == 0, "RP* size and counter restart");
    @(posedge clk); #1; chk(!upd, "upd is a pulse");
    th = 0;
    command(PE_HIT, 70, 70);
    chk(upd && rp.box == '{xmin: 9'd70, xmax: 9'd70, ymin: 9'd70, ymax: 9'd70}, "TH=0 updates every event");
    command(PE_CLEAR);
    chk(!occupied && !status, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
