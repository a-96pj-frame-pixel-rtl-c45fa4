// classify_ctrl: runs the NPU once per tracked object.
//
// While the RPU is in event mode the controller looks for the lowest occupied
// PE whose object has not been classified yet and whose RP has been updated
// at least min_upd times in event mode (so that the FOTU has measured its
// speed), and sends it down one of two paths:
//   slow object - the ISP is started with the object's RP as ROI; the patch
//     pixels it produces are packed 16 to a 128-bit word and written to the
//     NPU feature memory from address patch_base; when the ISP is done the
//     NPU runs the program at pc_patch;
//   fast object (flagged by the FOTU) - once its trajectory bank holds at
//     least traj_min points, the points are copied, one per feature-memory
//     word (low 32 bits), from address traj_base; then the NPU runs the
//     program at pc_traj.
// The class the NPU's WTA instruction returns is stored for that PE, which is
// then marked classified; the mark is cleared when the PE is freed, so a lost
// and re-detected object is classified again. Fast objects whose trajectory is
// still short are passed over until it is long enough.
//
// Interface: RPU/FOTU state (including the per-PE update pulses) in, ISP control and output in, trajectory memory
// read port, NPU feature-memory write port, NPU start/done. The NPU must hold
// the two programs (loaded by the host).
// Timing: a patch takes one gray frame; a trajectory copy len + 2 cycles.
//
// The paper states that the NPU is activated only once per tracked object and
// that slow objects use gray patches and fast objects trajectories; how this is
// sequenced is not described, so this controller is this design's own.
module classify_ctrl
  import anti_uav_pkg::*;
#(
  parameter int unsigned N     = NUM_PE,
  parameter int unsigned NB    = 8,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned PN    = 1024   // patch pixels (PW * PH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [8:0]      patch_base,
  input  logic [8:0]      traj_base,
  input  logic [5:0]      pc_patch,
  input  logic [5:0]      pc_traj,
  input  logic [$clog2(DEPTH):0] traj_min,
  input  rpu_mode_e       mode,
  input  logic [N-1:0]    occupied,
  input  rp_t             rps [N],
  input  logic [N-1:0]    fast,
  input  logic [N-1:0]    upd,
  input  logic [1:0]      min_upd,
  input  logic [NB-1:0]   bank_used,
  input  logic [4:0]      bank_pe  [NB],
  input  logic [$clog2(DEPTH):0] bank_len [NB],
  output logic            traj_rd_en,
  output logic [$clog2(NB*DEPTH)-1:0] traj_rd_addr,
  input  logic [31:0]     traj_rd_data,
  output logic            isp_start,
  output box_t            isp_roi,
  input  logic            isp_valid,
  input  logic [$clog2(PN)-1:0] isp_addr,
  input  logic [7:0]      isp_data,
  input  logic            isp_done,
  output logic            f_we,
  output logic [8:0]      f_addr,
  output logic [127:0]    f_data,
  output logic            npu_start,
  output logic [5:0]      npu_pc,
  input  logic            npu_done,
  input  logic [3:0]      npu_class,
  output logic            active,
  output logic [N-1:0]    classified,
  output logic [3:0]      obj_class [N],
  output logic [15:0]     n_cls_patch,
  output logic [15:0]     n_cls_traj
);

  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned DW = $clog2(DEPTH);

  typedef enum logic [2:0] {C_IDLE, C_ISP, C_TRAJ, C_NPU_GO, C_NPU} cstate_e;
  cstate_e state;

  logic [4:0]       cur;
  logic             cur_fast;
  logic [BW-1:0]    cur_bank;
  logic [DW:0]      cur_len, rd_i;
  logic             rd_pend;
  logic [8:0]       wr_addr;
  logic [127:0]     pack;

  // event-mode RP updates per PE (saturating), cleared when the PE is freed
  logic [1:0] n_upd [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) n_upd[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++)
        if (!occupied[i])                 n_upd[i] <= '0;
        else if (upd[i] && n_upd[i] != '1) n_upd[i] <= n_upd[i] + 1'b1;
    end
  end

  // candidate selection
  logic          cand_v, cand_fast;
  logic [4:0]    cand;
  logic [BW-1:0] cand_bank;
  logic [DW:0]   cand_len;
  always_comb begin
    cand_v    = 1'b0;
    cand      = '0;
    cand_fast = 1'b0;
    cand_bank = '0;
    cand_len  = '0;
    for (int i = N - 1; i >= 0; i--) begin
      logic          ready_i;
      logic [BW-1:0] b_i;
      logic [DW:0]   l_i;
      ready_i = 1'b0;
      b_i     = '0;
      l_i     = '0;
      for (int b = 0; b < NB; b++)
        if (bank_used[b] && bank_pe[b] == 5'(i)) begin
          b_i = BW'(b);
          l_i = bank_len[b];
        end
      if (!fast[i]) ready_i = 1'b1;
      else          ready_i = l_i >= traj_min && l_i != '0;
      if (occupied[i] && !classified[i] && ready_i && n_upd[i] >= min_upd) begin
        cand_v    = 1'b1;
        cand      = 5'(i);
        cand_fast = fast[i];
        cand_bank = b_i;
        cand_len  = l_i;
      end
    end
  end

  assign active       = state != C_IDLE;
  assign traj_rd_en   = state == C_TRAJ && rd_i < cur_len;
  assign traj_rd_addr = {cur_bank, rd_i[DW-1:0]};
  assign npu_start    = state == C_NPU_GO;
  assign npu_pc       = cur_fast ? pc_traj : pc_patch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= C_IDLE;
      cur         <= '0;
      cur_fast    <= 1'b0;
      cur_bank    <= '0;
      cur_len     <= '0;
      rd_i        <= '0;
      rd_pend     <= 1'b0;
      wr_addr     <= '0;
      pack        <= '0;
      isp_start   <= 1'b0;
      isp_roi     <= '0;
      f_we        <= 1'b0;
      f_addr      <= '0;
      f_data      <= '0;
      classified  <= '0;
      n_cls_patch <= '0;
      n_cls_traj  <= '0;
      for (int i = 0; i < N; i++) obj_class[i] <= '0;
    end else begin
      isp_start  <= 1'b0;
      f_we       <= 1'b0;
      classified <= classified & occupied;
      unique case (state)
        C_IDLE: if (mode == MODE_EVENT && cand_v) begin
          cur      <= cand;
          cur_fast <= cand_fast;
          cur_bank <= cand_bank;
          cur_len  <= cand_len;
          rd_i     <= '0;
          rd_pend  <= 1'b0;
          if (cand_fast) begin
            state <= C_TRAJ;
          end else begin
            isp_start <= 1'b1;
            isp_roi   <= rps[cand].box;
            state     <= C_ISP;
          end
        end
        C_ISP: begin
          if (isp_valid) begin
            pack[8*isp_addr[3:0] +: 8] <= isp_data;
            if (isp_addr[3:0] == 4'hF) begin
              f_we   <= 1'b1;
              f_addr <= patch_base + 9'(isp_addr >> 4);
              f_data <= {isp_data, pack[119:0]};
            end
          end
          if (isp_done) state <= C_NPU_GO;
        end
        C_TRAJ: begin
          rd_pend <= traj_rd_en;
          if (traj_rd_en) rd_i <= rd_i + 1'b1;
          if (rd_pend) begin
            f_we    <= 1'b1;
            f_addr  <= wr_addr;
            f_data  <= {96'd0, traj_rd_data};
          end
          wr_addr <= (rd_pend ? wr_addr + 1'b1 : (rd_i == '0 ? traj_base : wr_addr));
          if (!traj_rd_en && !rd_pend && rd_i != '0) state <= C_NPU_GO;
        end
        C_NPU_GO: state <= C_NPU;
        C_NPU: if (npu_done) begin
          obj_class[cur]  <= npu_class;
          classified[cur] <= 1'b1;
          if (cur_fast) n_cls_traj  <= n_cls_traj + 1'b1;
          else          n_cls_patch <= n_cls_patch + 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
