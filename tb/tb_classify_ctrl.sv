// tb_classify_ctrl: the controller with 4 PEs, behavioural stand-ins for the
// ISP (writes an 8 x 8 patch whose pixel value is 3 x address), the
// trajectory memory and the NPU. A slow object must be classified from its
// patch (packed words checked), a fast one from its trajectory (copied words
// checked) with the right program entry; each only once; a freed and
// re-occupied PE is classified again; nothing happens in frame mode or
// before an object has had min_upd RP updates.
module tb_classify_ctrl;
  import anti_uav_pkg::*;
  localparam int N = 4, NB = 2, DEPTH = 4, PN = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [8:0] patch_base = 9'd16, traj_base = 9'd100;
  logic [5:0] pc_patch = 6'd3, pc_traj = 6'd9;
  logic [$clog2(DEPTH):0] traj_min = 2;
  rpu_mode_e mode = MODE_FRAME;
  logic [N-1:0] occupied = '0, fast = '0, classified, upd = '0;
  logic [1:0] min_upd = 2'd2;
  rp_t rps [N];
  logic [NB-1:0] bank_used = '0;
  logic [4:0] bank_pe [NB];
  logic [$clog2(DEPTH):0] bank_len [NB];
  logic traj_rd_en, isp_start, isp_valid = 0, isp_done = 0, f_we, npu_start, npu_done = 0, active;
  logic [$clog2(NB*DEPTH)-1:0] traj_rd_addr;
  logic [31:0] traj_rd_data;
  box_t isp_roi;
  logic [$clog2(PN)-1:0] isp_addr = 0;
  logic [7:0] isp_data = 0;
  logic [8:0] f_addr;
  logic [127:0] f_data;
  logic [5:0] npu_pc;
  logic [3:0] npu_class = 0, obj_class [N];
  logic [15:0] n_cls_patch, n_cls_traj;
  int checks = 0, failures = 0;

  classify_ctrl #(.N(N), .NB(NB), .DEPTH(DEPTH), .PN(PN)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // trajectory memory stand-in: word = 1000 + address, one-cycle read
  always_ff @(posedge clk) if (traj_rd_en) traj_rd_data <= 32'(1000 + traj_rd_addr);

  // feature memory stand-in
  logic [127:0] fmem [512];
  always_ff @(posedge clk) if (f_we) fmem[f_addr] <= f_data;

  int n_isp = 0, n_npu = 0;
  logic [5:0] last_pc;
  box_t last_roi;
  // ISP stand-in
  initial forever begin
    @(posedge clk iff (isp_start && rst_n)); #1;
    n_isp++; last_roi = isp_roi;
    repeat (3) @(negedge clk);
    for (int a = 0; a < PN; a++) begin
      @(negedge clk); isp_valid = 1; isp_addr = 6'(a); isp_data = 8'(3 * a);
    end
    @(negedge clk); isp_valid = 0; isp_done = 1;
    @(negedge clk); isp_done = 0;
  end
  // NPU stand-in: class = 7 for patches, 3 for trajectories
  initial forever begin
    @(posedge clk iff (npu_start && rst_n)); #1;
    n_npu++; last_pc = npu_pc;
    repeat (5) @(negedge clk);
    npu_class = (npu_pc == pc_patch) ? 4'd7 : 4'd3;
    npu_done = 1; @(negedge clk); npu_done = 0;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) rps[i] = '{id: 5'(i), box: '{xmin: 9'(10*i), xmax: 9'(10*i+5), ymin: 9'd1, ymax: 9'd6}, size: 7'd20};
    bank_pe[0] = 5'd1; bank_pe[1] = 5'd0; bank_len[0] = 3; bank_len[1] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    occupied = 4'b0011; fast = 4'b0010; bank_used = 2'b01;
    repeat (20) @(negedge clk);
    chk(!active && n_isp == 0, "idle in frame mode");
    mode = MODE_EVENT;
    @(negedge clk); upd = 4'b0011; @(negedge clk); upd = '0;
    repeat (10) @(negedge clk);
    chk(!active && n_isp == 0, "waits for min_upd RP updates");
    @(negedge clk); upd = 4'b0011; @(negedge clk); upd = '0;
    wait (classified == 4'b0011);
    repeat (3) @(negedge clk);
    chk(n_isp == 1 && last_roi == rps[0].box, "patch of slow object via ISP");
    for (int w = 0; w < PN / 16; w++) begin
      logic [127:0] e;
      for (int b = 0; b < 16; b++) e[8*b +: 8] = 8'(3 * (16 * w + b));
      chk(fmem[16 + w] == e, $sformatf("patch word %0d", w));
    end
    for (int i = 0; i < 3; i++) chk(fmem[100 + i] == 128'(1000 + i), $sformatf("trajectory word %0d", i));
    chk(obj_class[0] == 7 && obj_class[1] == 3 && n_cls_patch == 1 && n_cls_traj == 1, "classes stored");
    chk(n_npu == 2 && last_pc == pc_traj, "NPU run once per object");
    repeat (50) @(negedge clk);
    chk(n_npu == 2 && !active, "no repeated classification");
    occupied = 4'b0010;
    @(negedge clk); @(negedge clk);
    chk(classified == 4'b0010, "mark cleared when PE freed");
    occupied = 4'b0011;
    repeat (10) @(negedge clk);
    chk(classified == 4'b0010, "re-detected object waits for updates");
    repeat (2) begin @(negedge clk); upd = 4'b0001; @(negedge clk); upd = '0; end
    wait (classified == 4'b0011);
    chk(n_cls_patch == 2 && n_npu == 3, "re-detected object classified again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
