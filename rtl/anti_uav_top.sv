// anti_uav_top: the anti-UAV vision chip - event signal processor (ESP), image
// signal processor (ISP), neural network processing unit (NPU) and the
// controller that classifies each tracked object once.
//
// Data flow: the event camera's AER stream enters the ESP, which finds
// objects in event frames (frame mode), tracks them event by event (event
// mode) and records trajectories of fast objects. For every new object the
// classify_ctrl either has the ISP cut the object's patch out of the gray
// frame stream or copies its trajectory, puts it into the NPU's feature memory
// and starts the NPU program for that kind of input. Classes are reported per
// RPU PE (obj_class, valid when classified is set).
//
// External ports: AER events; AXI4-Lite configuration of the ESP; gray pixel
// stream (with back-pressure); the host/DMA port of the NPU memories, which is
// used by the host only while no classification is running (host_ok); the
// classification set-up (base addresses and program entry points); tracking
// state and statistics. The on-chip AXI bus of the block diagram is replaced by
// these point-to-point connections; the DMA engine and the off-chip memory are
// outside (the host port stands for them).
module anti_uav_top
  import anti_uav_pkg::*;
#(
  parameter int unsigned W     = IMG_W,
  parameter int unsigned H     = IMG_H,
  parameter int unsigned N     = NUM_PE,
  parameter int unsigned NB    = 8,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned PW    = 32,
  parameter int unsigned PH    = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // event camera
  input  logic          ev_valid,
  input  aer_event_t    ev,
  // ESP configuration (AXI4-Lite)
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
  // gray image sensor
  input  logic          pix_valid,
  output logic          pix_ready,
  input  coord_t        pix_x,
  input  coord_t        pix_y,
  input  logic [7:0]    pix,
  // NPU host / DMA port
  input  logic          h_we,
  input  logic [1:0]    h_mem,
  input  logic [8:0]    h_addr,
  input  logic [127:0]  h_wdata,
  input  logic          h_re,
  input  logic [6:0]    h_raddr,
  output logic [127:0]  h_rdata,
  output logic          host_ok,
  // classification set-up
  input  logic [8:0]    patch_base,
  input  logic [8:0]    traj_base,
  input  logic [5:0]    pc_patch,
  input  logic [5:0]    pc_traj,
  input  logic [$clog2(DEPTH):0] traj_min,
  input  logic [1:0]    min_upd,
  input  logic          traj_clear,
  // results and state
  output rpu_mode_e     mode,
  output logic [N-1:0]  occupied,
  output rp_t           rps [N],
  output logic [N-1:0]  fast,
  output logic [N-1:0]  classified,
  output logic [3:0]    obj_class [N],
  output logic          npu_err,
  output logic [15:0]   n_merge,
  output logic [15:0]   n_drop,
  output logic [15:0]   n_switch_event,
  output logic [15:0]   n_switch_frame,
  output logic [15:0]   n_points,
  output logic [15:0]   n_ev_lost,
  output logic [15:0]   n_frames,
  output logic [15:0]   n_cls_patch,
  output logic [15:0]   n_cls_traj,
  output logic [31:0]   n_mac,
  output logic [31:0]   n_skip
);

  localparam int unsigned PN = PW * PH;

  logic [N-1:0]  rp_upd;
  logic [NB-1:0] bank_used;
  logic [4:0]    bank_pe  [NB];
  logic [$clog2(DEPTH):0] bank_len [NB];
  logic          traj_rd_en;
  logic [$clog2(NB*DEPTH)-1:0] traj_rd_addr;
  logic [31:0]   traj_rd_data;

  esp #(.W(W), .H(H), .N(N), .NB(NB), .DEPTH(DEPTH)) u_esp (
    .clk, .rst_n, .ev_valid, .ev,
    .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .wstrb, .bvalid, .bready,
    .bresp, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata, .rresp,
    .mode, .occupied, .rps, .fast, .rp_upd, .traj_clear, .bank_used, .bank_pe,
    .bank_len, .traj_rd_en, .traj_rd_addr, .traj_rd_data,
    .n_merge, .n_drop, .n_switch_event, .n_switch_frame, .n_points, .n_ev_lost,
    .n_frames
  );

  logic       isp_start, isp_valid, isp_busy, isp_done;
  box_t       isp_roi;
  logic [$clog2(PN)-1:0] isp_addr;
  logic [7:0] isp_data;

  isp #(.PW(PW), .PH(PH)) u_isp (
    .clk, .rst_n, .start(isp_start), .roi(isp_roi), .pix_valid, .pix_ready,
    .pix_x, .pix_y, .pix, .out_valid(isp_valid), .out_addr(isp_addr),
    .out_data(isp_data), .busy(isp_busy), .done(isp_done)
  );

  logic         c_we, cls_active;
  logic [8:0]   c_addr;
  logic [127:0] c_data;
  logic         npu_start, npu_busy, npu_done, wta_valid;
  logic [5:0]   npu_pc;
  logic [3:0]   wta_class;

  classify_ctrl #(.N(N), .NB(NB), .DEPTH(DEPTH), .PN(PN)) u_cls (
    .clk, .rst_n, .patch_base, .traj_base, .pc_patch, .pc_traj, .traj_min,
    .mode, .occupied, .rps, .fast, .upd(rp_upd), .min_upd, .bank_used, .bank_pe, .bank_len,
    .traj_rd_en, .traj_rd_addr, .traj_rd_data,
    .isp_start, .isp_roi, .isp_valid, .isp_addr, .isp_data, .isp_done,
    .f_we(c_we), .f_addr(c_addr), .f_data(c_data),
    .npu_start, .npu_pc, .npu_done, .npu_class(wta_class),
    .active(cls_active), .classified, .obj_class, .n_cls_patch, .n_cls_traj
  );

  assign host_ok = !cls_active && !npu_busy;

  npu u_npu (
    .clk, .rst_n,
    .h_we(cls_active ? c_we : h_we && host_ok),
    .h_mem(cls_active ? 2'd0 : h_mem),
    .h_addr(cls_active ? c_addr : h_addr),
    .h_wdata(cls_active ? c_data : h_wdata),
    .h_re(h_re && host_ok), .h_raddr, .h_rdata,
    .start(npu_start), .start_pc(npu_pc), .busy(npu_busy), .done(npu_done),
    .err(npu_err), .wta_valid, .wta_class, .n_mac, .n_skip
  );

endmodule
