// esp: Event Signal Processor, the always-on part of the chip.
//
// In frame mode, events from the AER input are collected by the frame builder
// into binary event frames; each frame is scanned out row by row, cleaned by
// the noise filter, run-length encoded into slices and passed to the RPU,
// which labels connected slices into region proposals (RPs). Once an RP of
// more than nine pixels exists the RPU switches to event mode: the frame
// builder stops and every event goes to the RPU (the input multiplexer of
// the block diagram) through a short event queue (event_fifo) that absorbs
// bursts, and the PEs track their RPs event by event. The FOTU watches
// every RP update, adapts each PE's update threshold and records
// trajectories of fast objects; while it does, it holds the RPU in event
// mode. All settings come from the AXI4-Lite register file.
//
// Interface: AER event input; AXI4-Lite configuration port; RPU state (mode,
// RPs, occupied PEs, fast flags); trajectory memory read port and bank status;
// event counters. Events that arrive while the EQ_DEPTH-entry event queue is
// full are dropped and counted (n_ev_lost); the queue is emptied in frame mode.
// Timing: frame mode W x H cycles per frame (RLE bound); event mode two cycles
// per event.
//
// Follows the paper (Fig. 2): FB, NF, RLE, RPU, FOTU and the slice/event
// multiplexer in one always-on block, with the input queue the PE diagram
// draws. The queue depth and the time stamp (cycle counter divided by
// 2^STAMP_SHIFT) are this design's choices.
module esp
  import anti_uav_pkg::*;
#(
  parameter int unsigned W           = IMG_W,
  parameter int unsigned H           = IMG_H,
  parameter int unsigned N           = NUM_PE,
  parameter int unsigned NB          = 8,
  parameter int unsigned DEPTH       = 64,
  parameter int unsigned STAMP_SHIFT = 16,
  parameter int unsigned EQ_DEPTH    = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ev_valid,
  input  aer_event_t    ev,
  // AXI4-Lite configuration port
  input  logic          awvalid,
  output logic          awready,
  input  logic [7:0]    awaddr,
  input  logic          wvalid,
  output logic          wready,
  input  logic [31:0]   wdata,
  input  logic [3:0]    wstrb,
  output logic          bvalid,
  input  logic          bready,
  output logic [1:0]    bresp,
  input  logic          arvalid,
  output logic          arready,
  input  logic [7:0]    araddr,
  output logic          rvalid,
  input  logic          rready,
  output logic [31:0]   rdata,
  output logic [1:0]    rresp,
  // tracking state
  output rpu_mode_e     mode,
  output logic [N-1:0]  occupied,
  output rp_t           rps [N],
  output logic [N-1:0]  fast,
  output logic [N-1:0]  rp_upd,
  // trajectory memory
  input  logic          traj_clear,
  output logic [NB-1:0] bank_used,
  output logic [4:0]    bank_pe  [NB],
  output logic [$clog2(DEPTH):0] bank_len [NB],
  input  logic          traj_rd_en,
  input  logic [$clog2(NB*DEPTH)-1:0] traj_rd_addr,
  output logic [31:0]   traj_rd_data,
  // statistics
  output logic [15:0]   n_merge,
  output logic [15:0]   n_drop,
  output logic [15:0]   n_switch_event,
  output logic [15:0]   n_switch_frame,
  output logic [15:0]   n_points,
  output logic [15:0]   n_ev_lost,
  output logic [15:0]   n_frames
);

  esp_cfg_t cfg;
  logic [31:0] status;

  esp_config_regs u_cfg (
    .clk, .rst_n, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .wstrb,
    .bvalid, .bready, .bresp, .arvalid, .arready, .araddr, .rvalid, .rready,
    .rdata, .rresp, .status, .cfg
  );

  assign status = {n_switch_event[7:0], n_drop[7:0], 15'd0, mode};

  // frame path
  logic         fb_valid, fb_ready, fb_last, fb_start;
  coord_t       fb_idx;
  logic [W-1:0] fb_data;
  logic         nf_valid, nf_ready, nf_last;
  coord_t       nf_idx;
  logic [W-1:0] nf_data;
  logic         s_valid, s_ready, s_eof;
  slice_t       s_slice;

  frame_builder #(.W(W), .H(H)) u_fb (
    .clk, .rst_n, .en(mode == MODE_FRAME), .frame_period(cfg.frame_period),
    .ev_valid(ev_valid && mode == MODE_FRAME), .ev, .frame_start(fb_start),
    .row_valid(fb_valid), .row_ready(fb_ready), .row_idx(fb_idx),
    .row_data(fb_data), .row_last(fb_last)
  );

  noise_filter #(.W(W)) u_nf (
    .clk, .rst_n, .in_valid(fb_valid), .in_ready(fb_ready), .in_idx(fb_idx),
    .in_data(fb_data), .in_last(fb_last), .out_valid(nf_valid),
    .out_ready(nf_ready), .out_idx(nf_idx), .out_data(nf_data), .out_last(nf_last)
  );

  rle_encoder #(.W(W)) u_rle (
    .clk, .rst_n, .in_valid(nf_valid), .in_ready(nf_ready), .in_idx(nf_idx),
    .in_data(nf_data), .in_last(nf_last), .out_valid(s_valid),
    .out_ready(s_ready), .out_slice(s_slice), .out_eof(s_eof)
  );

  // event path (multiplexer: events bypass FB/NF/RLE in event mode)
  logic e_ready;
  logic [N-1:0] freed;
  logic [TH_W-1:0] th [N];
  logic hold;
  logic [15:0] n_lost_pts;

  // event queue: absorbs bursts while the RPU decides on the previous event
  logic   eq_full, eq_valid;
  coord_t eq_x, eq_y;
  event_fifo #(.WIDTH(2 * CW), .DEPTH(EQ_DEPTH)) u_evq (
    .clk, .rst_n, .flush(mode == MODE_FRAME), .push(ev_valid && mode == MODE_EVENT),
    .din({ev.x, ev.y}), .full(eq_full), .valid(eq_valid), .dout({eq_x, eq_y}),
    .pop(eq_valid && e_ready)
  );

  rpu #(.N(N)) u_rpu (
    .clk, .rst_n, .nbr_dx(cfg.nbr_dx), .nbr_dy(cfg.nbr_dy), .ev_nbr(cfg.ev_nbr),
    .valid_size(cfg.valid_size), .refresh_period(cfg.refresh_period), .hold, .th,
    .s_valid, .s_ready, .s_slice, .s_eof,
    .e_valid(eq_valid), .e_ready, .e_x(eq_x), .e_y(eq_y),
    .mode, .occupied, .rps, .upd(rp_upd), .freed,
    .n_merge, .n_drop, .n_switch_event, .n_switch_frame
  );

  logic [STAMP_SHIFT+13:0] tcount;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcount    <= '0;
      n_ev_lost <= '0;
      n_frames  <= '0;
    end else begin
      tcount <= tcount + 1'b1;
      if (ev_valid && mode == MODE_EVENT && eq_full) n_ev_lost <= n_ev_lost + 1'b1;
      if (fb_start) n_frames <= n_frames + 1'b1;
    end
  end

  fotu #(.N(N), .NB(NB), .DEPTH(DEPTH)) u_fotu (
    .clk, .rst_n, .bias(cfg.bias), .wa(cfg.wa), .ws(cfg.ws), .th_a(cfg.th_a),
    .th_s(cfg.th_s), .step(cfg.step), .stamp(tcount[STAMP_SHIFT +: 14]),
    .upd(rp_upd), .rps, .freed, .th, .hold, .fast, .traj_clear,
    .bank_used, .bank_pe, .bank_len, .rd_en(traj_rd_en), .rd_addr(traj_rd_addr),
    .rd_data(traj_rd_data), .n_points, .n_lost(n_lost_pts)
  );

endmodule
