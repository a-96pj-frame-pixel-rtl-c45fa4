// tb_esp_rates: the event signal processor at its full size (346 x 260
// sensor, 32 PEs, 8 trajectory banks; no parameter is overridden) measured
// against the latencies and rates published for the chip.
//   Frame mode: the cycles from the start of a frame scan to the RPU's
//     decision (switch to event mode) must not exceed W x (H + 5), the
//     frame-mode latency given for a W x H camera; at 153 MHz this also
//     bounds the frame rate from below (473.5 frames/s needs at most
//     323,126 cycles per frame).
//   Event mode: the latency from an event to the RP update it triggers must
//     lie in the published 2..10 cycles; 2000 events at one every two cycles
//     (76.5 M events/s at 153 MHz, above the published 10.25 M events/s)
//     must all be taken without loss; a burst at one event per cycle must
//     overflow the event queue, which shows the two-cycle limit is real.
module tb_esp_rates;
  import anti_uav_pkg::*;
  localparam int W = IMG_W, H = IMG_H, N = NUM_PE, NB = 8, DEPTH = 64;
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
  longint cyc = 0;
  always @(posedge clk) cyc++;

  esp dut (.*);

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
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0, t1, lat;
    int lost0;
    repeat (2) @(posedge clk); rst_n = 1;
    wr(8'h00, 32'd2000);      // frame period
    wr(8'h18, 32'd1);         // bias 1, no area or speed terms: TH = 1
    wr(8'h1C, 32'd0);
    wr(8'h20, 32'd0);
    for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) send(200 + x, 100 + y);
    // frame mode latency
    wait (n_frames == 1);
    t0 = cyc;
    wait (mode == MODE_EVENT);
    t1 = cyc;
    lat = t1 - t0;
    $display("frame mode: %0d cycles from scan start to decision, bound W x (H + 5) = %0d", lat, W * (H + 5));
    chk(lat <= longint'(W * (H + 5)), "frame-mode latency within W x (H + 5)");
    chk(lat >= longint'(W * H), "frame-mode latency at least one column per cycle");
    chk(153_000_000 / lat >= 473, "frame rate at 153 MHz at least 473.5 frames/s");
    chk($countones(occupied) == 1, "one object found");
    // event mode latency: the second matching event triggers the update (TH = 1)
    send(201, 101);
    repeat (20) @(negedge clk);
    @(negedge clk); ev_valid = 1; ev = '{x: 9'd202, y: 9'd102, pol: 1'b1};
    t0 = cyc;
    @(negedge clk); ev_valid = 0;
    while (!(|rp_upd) && cyc - t0 < 100) @(posedge clk);
    lat = cyc - t0;
    $display("event mode: update %0d cycles after the event", lat);
    chk(|rp_upd && lat >= 2 && lat <= 10, $sformatf("event-mode latency %0d within 2..10", lat));
    // sustained rate: one event every two cycles
    lost0 = n_ev_lost;
    for (int i = 0; i < 2000; i++) send(200 + (i % 4), 100 + ((i / 4) % 4));
    repeat (10) @(negedge clk);
    chk(n_ev_lost == 16'(lost0), $sformatf("no event lost at one per two cycles (%0d lost)", n_ev_lost - 16'(lost0)));
    chk(mode == MODE_EVENT, "still tracking");
    // one event per cycle for 20 cycles: more than the queue can absorb
    @(negedge clk); ev_valid = 1; ev = '{x: 9'd201, y: 9'd101, pol: 1'b1};
    repeat (20) @(negedge clk);
    ev_valid = 0;
    repeat (10) @(negedge clk);
    chk(n_ev_lost > 16'(lost0), "burst at one event per cycle overflows the queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
