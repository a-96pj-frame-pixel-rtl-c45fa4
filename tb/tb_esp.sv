// tb_esp: the event signal processor on a 32 x 16 sensor with 8 PEs.
// A 4 x 4 blob plus an isolated noise event are accumulated into an event
// frame; the noise filter must remove the noise, the RPU must produce exactly
// the blob's RP and switch to event mode. The object then stays still until
// the refresh period returns the unit to frame mode. A second detection is
// followed by events that move the object 3 pixels per update: it must be
// updated, become fast, have its trajectory recorded and hold event mode.
module tb_esp;
  import anti_uav_pkg::*;
  localparam int W = 32, H = 16, N = 8, NB = 2, DEPTH = 8;
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
  rpu_mode_e mode;
  logic [N-1:0] occupied, fast, rp_upd;
  rp_t rps [N];
  logic traj_clear = 0, traj_rd_en = 0;
  logic [NB-1:0] bank_used;
  logic [4:0] bank_pe [NB];
  logic [$clog2(DEPTH):0] bank_len [NB];
  logic [$clog2(NB*DEPTH)-1:0] traj_rd_addr = '0;
  logic [31:0] traj_rd_data;
  logic [15:0] n_merge, n_drop, n_switch_event, n_switch_frame, n_points, n_ev_lost, n_frames;
  int checks = 0, failures = 0;

  esp #(.W(W), .H(H), .N(N), .NB(NB), .DEPTH(DEPTH)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
  endtask
  task automatic send(input int x, input int y);
    @(negedge clk); ev_valid = 1; ev = '{x: 9'(x), y: 9'(y), pol: 1'b1};
    @(negedge clk); ev_valid = 0;
    repeat (2) @(negedge clk);
  endtask
  task automatic blob(input int x0, input int y0);
    for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) send(x0 + x, y0 + y);
  endtask
  function automatic int n_occ();
    return $countones(occupied);
  endfunction

  int n_upd = 0;
  always @(posedge clk) n_upd += $countones(rp_upd);

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int pe;
    repeat (2) @(posedge clk); rst_n = 1;
    wr(8'h00, 32'd400);     // frame period
    wr(8'h04, 32'd3000);    // refresh period
    wr(8'h18, 32'd2);       // bias
    wr(8'h1C, 32'd0);       // wa
    wr(8'h20, 32'd0);       // ws: TH = 2
    blob(10, 5);
    send(25, 12);           // isolated noise
    chk(mode == MODE_FRAME, "starts in frame mode");
    for (int t = 0; t < 20000 && mode != MODE_EVENT; t++) @(negedge clk);
    chk(mode == MODE_EVENT, "object found, event mode within 20000 cycles");
    @(negedge clk);
    chk(n_occ() == 1, $sformatf("one object, %0d RPs", n_occ()));
    pe = 0;
    for (int i = 0; i < N; i++) if (occupied[i]) pe = i;
    chk(rps[pe].box == '{xmin: 9'd10, xmax: 9'd13, ymin: 9'd5, ymax: 9'd8} && rps[pe].size == 16,
        "blob RP from CCL");
    chk(n_frames >= 1 && n_switch_event == 1, "frame built, switched to event mode");
    // stationary object: refresh back to frame mode
    wait (mode == MODE_FRAME);
    chk(n_switch_frame == 1 && n_occ() == 0, "periodic return to frame mode");
    // detect again, then move the object fast
    blob(4, 6);
    wait (mode == MODE_EVENT);
    @(negedge clk);
    for (int i = 0; i < N; i++) if (occupied[i]) pe = i;
    for (int k = 1; k <= 8; k++) begin
      send(4 + 3*k, 6); send(7 + 3*k, 9); send(5 + 3*k, 7);
    end
    repeat (5) @(negedge clk);
    chk(n_upd == 8, $sformatf("8 RP updates, got %0d", n_upd));
    chk(rps[pe].box == '{xmin: 9'd28, xmax: 9'd31, ymin: 9'd6, ymax: 9'd9}, "RP follows the object");
    chk(fast[pe] && n_points >= 3 && bank_used[0] && bank_pe[0] == 5'(pe), $sformatf("trajectory recorded (%0d points)", n_points));
    @(negedge clk); traj_rd_en = 1; traj_rd_addr = '0;
    @(negedge clk); traj_rd_en = 0;
    chk(traj_rd_data[31:23] > 9'd5 && traj_rd_data[22:14] == 9'd7, $sformatf("first trajectory point x %0d", traj_rd_data[31:23]));
    repeat (3500) @(negedge clk);
    chk(mode == MODE_EVENT, "fast object holds event mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
