// tb_anti_uav_top: end-to-end run of the whole chip on a 32 x 16 event sensor
// with 8 PEs, 2 trajectory banks and an 8 x 8 patch.
// Phase 1 (frame mode): one frame holds a U-shaped object (two bars joined by
// a bottom row, so the RPU must merge RPs), a square object and sixteen
// two-pixel blobs, more than the free PEs (overflow drops). The two objects
// survive, the unit enters event mode. Events keep object 1 still and object 2
// still; after two RP updates each is classified from its gray patch (ISP +
// NPU); the class of object 1 is compared with a reference model of ISP and
// NPU. A burst of back-to-back events overruns the event queue (lost
// events). The
// refresh period then returns the unit to frame mode.
// Phase 2: a new object is detected and moved quickly: it becomes fast, its
// trajectory is recorded, it holds event mode and is classified from its
// trajectory. Every mechanism is counted and must have happened.
module tb_anti_uav_top;
  import anti_uav_pkg::*;
  localparam int W = 32, H = 16, N = 8, NB = 2, DEPTH = 8, PW = 8, PH = 8;
  localparam int FRAME_P = 600, REFRESH_P = 6000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ev_valid = 0;
  aer_event_t ev = '0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic arvalid = 0, arready, rvalid, rready = 1;
  logic [7:0] awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 4'hF;
  logic [1:0] bresp, rresp;
  logic pix_valid = 0, pix_ready;
  coord_t pix_x = 0, pix_y = 0;
  logic [7:0] pix = 0;
  logic h_we = 0, h_re = 0, host_ok;
  logic [1:0] h_mem = 0;
  logic [8:0] h_addr = 0;
  logic [127:0] h_wdata = 0, h_rdata;
  logic [6:0] h_raddr = 0;
  logic [8:0] patch_base = 9'd16, traj_base = 9'd100;
  logic [5:0] pc_patch = 6'd0, pc_traj = 6'd8;
  logic [$clog2(DEPTH):0] traj_min = 3;
  logic [1:0] min_upd = 2;
  logic traj_clear = 0;
  rpu_mode_e mode;
  logic [N-1:0] occupied, fast, classified;
  rp_t rps [N];
  logic [3:0] obj_class [N];
  logic npu_err;
  logic [15:0] n_merge, n_drop, n_switch_event, n_switch_frame, n_points, n_ev_lost, n_frames, n_cls_patch, n_cls_traj;
  logic [31:0] n_mac, n_skip;
  int checks = 0, failures = 0;

  anti_uav_top #(.W(W), .H(H), .N(N), .NB(NB), .DEPTH(DEPTH), .PW(PW), .PH(PH)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
  endtask
  task automatic hw(input int mem, input int addr, input logic [127:0] d);
    @(negedge clk); h_we = 1; h_mem = 2'(mem); h_addr = 9'(addr); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask
  task automatic send(input int x, input int y, input int gap = 2);
    @(negedge clk); ev_valid = 1; ev = '{x: 9'(x), y: 9'(y), pol: 1'b0};
    @(negedge clk); ev_valid = 0;
    repeat (gap) @(negedge clk);
  endtask
  function automatic logic [7:0] gray(int x, int y);
    return 8'((x * 7 + y * 13) % 200);
  endfunction
  function automatic logic [7:0] med3(logic [7:0] a, logic [7:0] b, logic [7:0] c);
    logic [7:0] s [3];
    s = '{a, b, c}; s.sort();
    return s[1];
  endfunction

  // gray camera: frames stream continuously
  initial begin
    @(posedge rst_n);
    forever for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      pix_valid = 1; pix_x = 9'(x); pix_y = 9'(y); pix = gray(x, y);
      @(posedge clk); while (!pix_ready) @(posedge clk);
      #1;
    end
  end

  int wgt [4][16];
  function automatic int expected_class(box_t b);
    int w, h, P [PW*PH], best, bv;
    w = b.xmax - b.xmin + 1; h = b.ymax - b.ymin + 1;
    for (int v = 0; v < PH; v++) for (int u = 0; u < PW; u++) begin
      int p, q, xs;
      logic [7:0] m0, m1;
      p = (u * w) >> $clog2(PW); q = (v * h) >> $clog2(PH); xs = b.xmin + p;
      m0 = (p == 0) ? gray(xs, b.ymin + q) : gray(xs - 1, b.ymin + q);
      m1 = (p == 0) ? gray(xs, b.ymin + q) : (p == 1) ? gray(xs - 1, b.ymin + q) : gray(xs - 2, b.ymin + q);
      P[v * PW + u] = $signed(med3(gray(xs, b.ymin + q), m0, m1));
    end
    best = 0; bv = -1;
    for (int j = 0; j < 10; j++) begin
      longint s;
      int y;
      s = 0;
      for (int k = 0; k < 4; k++) s += P[16 * k] * wgt[k][j];
      y = int'(s >>> 4);
      if (y < 0) y = 0;
      if (y > 127) y = 127;
      if (y > bv) begin bv = y; best = j; end
    end
    return best;
  endfunction

  initial begin
    #50000000; failures++;
    $display("WATCHDOG cls_state=%0d classified=%b occ=%b nupd=%0d isp_busy=%0d npu_busy=%0d mode=%0d fast=%b", dut.u_cls.state, classified, occupied, n_upd, dut.isp_busy, dut.npu_busy, mode, fast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_upd = 0, n_hold_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    n_upd += $countones(dut.rp_upd);
    if (dut.u_esp.u_fotu.hold && mode == MODE_EVENT) n_hold_cycles++;
  end

  initial begin
    int pe1, pe2, pe3;
    int xs [4];
    logic [127:0] word;
    xs = '{0, 5, 18, 29};
    repeat (2) @(posedge clk); rst_n = 1;
    wr(8'h00, FRAME_P);     // frame period
    wr(8'h04, REFRESH_P);   // refresh period
    wr(8'h18, 32'd2);       // bias
    wr(8'h1C, 32'd0);       // wa
    wr(8'h20, 32'd0);       // ws  -> TH = 2
    // NPU: weights and two programs
    for (int k = 0; k < 4; k++) begin
      for (int j = 0; j < 16; j++) begin wgt[k][j] = $signed(8'($urandom)); word[8*j +: 8] = 8'(wgt[k][j]); end
      hw(1, k, word);
    end
    hw(3, 0, 128'({1'b0, 18'd0, 1'b0, 1'b1, 5'd4, 7'd0, 10'd4, 9'd0, 9'd16, OP_MATMUL}));
    hw(3, 1, 128'({1'b1, 48'd0, 5'd10, 7'd0, OP_WTA}));
    hw(3, 8, 128'({1'b0, 18'd0, 1'b0, 1'b1, 5'd6, 7'd0, 10'd3, 9'd0, 9'd100, OP_MATMUL}));
    hw(3, 9, 128'({1'b1, 48'd0, 5'd10, 7'd0, OP_WTA}));
    // ---------------- phase 1: one event frame ----------------
    for (int y = 1; y <= 3; y++) begin send(10, y); send(11, y); send(14, y); send(15, y); end
    for (int x = 10; x <= 15; x++) send(x, 4);
    for (int y = 1; y <= 4; y++) for (int x = 24; x <= 27; x++) send(x, y);
    for (int r = 8; r < 8 + 2 * (N / 4 + 2); r += 2) for (int i = 0; i < 4; i++) begin
      send(xs[i], r); send(xs[i] + 1, r);
    end
    wait (mode == MODE_EVENT);
    @(negedge clk);
    chk($countones(occupied) == 2, $sformatf("two objects, %0d RPs", $countones(occupied)));
    pe1 = 0; pe2 = 0;
    for (int i = N - 1; i >= 0; i--) if (occupied[i]) begin
      if (rps[i].box.xmin == 10) pe1 = i; else pe2 = i;
    end
    chk(rps[pe1].box == '{xmin: 9'd10, xmax: 9'd15, ymin: 9'd1, ymax: 9'd4} && rps[pe1].size == 18, "U object RP after merge");
    chk(rps[pe2].box == '{xmin: 9'd24, xmax: 9'd27, ymin: 9'd1, ymax: 9'd4}, "square object RP");
    // keep both still: three events per update, at the box corners
    repeat (2) begin
      send(10, 1); send(15, 4); send(12, 2);
      send(24, 1); send(27, 4); send(25, 2);
    end
    wait (classified[pe1] && classified[pe2]);
    chk(n_cls_patch == 2 && n_cls_traj == 0, "both classified from patches");
    chk(obj_class[pe1] == 4'(expected_class(rps[pe1].box)),
        $sformatf("class of object 1: %0d exp %0d", obj_class[pe1], expected_class(rps[pe1].box)));
    // burst of back-to-back events overruns the event queue
    @(negedge clk); ev_valid = 1; ev = '{x: 9'd12, y: 9'd2, pol: 1'b0};
    repeat (12) @(negedge clk);
    ev_valid = 0;
    wait (mode == MODE_FRAME);
    chk(n_switch_frame == 1, "refresh to frame mode");
    // ---------------- phase 2: fast object ----------------
    for (int y = 6; y <= 9; y++) for (int x = 2; x <= 5; x++) send(x, y);
    wait (mode == MODE_EVENT);
    @(negedge clk);
    pe3 = 0;
    for (int i = 0; i < N; i++) if (occupied[i]) pe3 = i;
    for (int k = 1; k <= 7; k++) begin
      send(2 + 3*k, 6); send(5 + 3*k, 9); send(3 + 3*k, 7);
    end
    repeat (20) @(negedge clk);
    chk(fast[pe3], "object 3 is fast");
    wait (classified[pe3]);
    chk(n_cls_traj == 1, "classified from its trajectory");
    chk(!npu_err, "no NPU error");
    $display("mechanisms: merge=%0d drop=%0d to_event=%0d to_frame=%0d rp_updates=%0d points=%0d ev_lost=%0d hold_cycles=%0d frames=%0d patch_cls=%0d traj_cls=%0d zero_skips=%0d",
             n_merge, n_drop, n_switch_event, n_switch_frame, n_upd, n_points, n_ev_lost, n_hold_cycles, n_frames, n_cls_patch, n_cls_traj, n_skip);
    chk(n_merge > 0, "merge happened");
    chk(n_drop > 0, "PE overflow happened");
    chk(n_switch_event == 2, "frame -> event switches");
    chk(n_switch_frame == 1, "event -> frame switch");
    chk(n_upd > 0, "event-mode RP updates");
    chk(n_points >= 3, "trajectory points recorded");
    chk(n_ev_lost > 0, "events lost when the event queue is full");
    chk(n_hold_cycles > 0, "FOTU hold");
    chk(n_skip > 0, "zero skipping");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
