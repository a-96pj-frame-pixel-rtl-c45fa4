// rpu_pe: one processing element of the Region Proposal Unit (RPU).
//
// The PE buffers one region proposal (RP: id, bounding box, size). For every
// input broadcast by the data scheduler - a slice in frame mode, a single event
// in event mode - its location comparator checks whether the input lies in the
// RP's neighbourhood: the box grown by nbr_dx/nbr_dy in frame mode and by
// ev_nbr (the distance "dL") in event mode. The result is latched in the status
// register (1 = merge, 0 = not merge) for the PE controller, which answers in
// the next cycle with a command:
//   PE_LOAD  - replace the RP (new RP, frame-mode update, or result of a merge)
//   PE_CLEAR - free the PE
//   PE_HIT   - event mode: count one matched event at (cmd_x, cmd_y)
// In event mode the PE counts matched events and records the outermost
// positions Xmin/Ymin/Xmax/Ymax of the matched events. When the counter exceeds
// the threshold th (set by the FOTU), the RP is replaced by the recorded box
// (RP*), the size field takes the event count, the counter restarts and upd
// pulses for one cycle.
//
// Timing: status is valid one cycle after in_valid; commands act at the next
// clock edge.
//
// Follows the paper (Fig. 3): location comparator, status register, counter,
// min/max record, RP update controller, update when counter > TH. Own choices:
// neighbourhood widths, the RP field split, and that the size field holds the
// pixel count in frame mode and the event count in event mode.
module rpu_pe
  import anti_uav_pkg::*;
#(
  parameter logic [4:0] ID = 5'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  rpu_mode_e   mode,
  input  coord_t      nbr_dx,
  input  coord_t      nbr_dy,
  input  coord_t      ev_nbr,
  input  logic [TH_W-1:0] th,
  // broadcast input
  input  logic        in_valid,
  input  slice_t      in_slice,
  // command from the PE controller
  input  pe_cmd_e     cmd,
  input  rp_t         cmd_rp,
  input  coord_t      cmd_x,
  input  coord_t      cmd_y,
  // state
  output logic        occupied,
  output logic        status,
  output rp_t         rp,
  output logic        upd,
  output logic [TH_W-1:0] cnt
);

  box_t rec;
  logic [CW:0] gx, gy;

  // location comparator (one guard bit against wrap-around)
  always_comb begin
    gx = (mode == MODE_EVENT) ? {1'b0, ev_nbr} : {1'b0, nbr_dx};
    gy = (mode == MODE_EVENT) ? {1'b0, ev_nbr} : {1'b0, nbr_dy};
  end

  logic hit_now;
  assign hit_now = occupied
                && ({1'b0, in_slice.c2}  + gx >= {1'b0, rp.box.xmin})
                && ({1'b0, in_slice.c1}       <= {1'b0, rp.box.xmax} + gx)
                && ({1'b0, in_slice.row} + gy >= {1'b0, rp.box.ymin})
                && ({1'b0, in_slice.row}      <= {1'b0, rp.box.ymax} + gy);

  box_t rec_next;
  always_comb begin
    if (cnt == '0) begin
      rec_next = '{xmin: cmd_x, xmax: cmd_x, ymin: cmd_y, ymax: cmd_y};
    end else begin
      rec_next.xmin = (cmd_x < rec.xmin) ? cmd_x : rec.xmin;
      rec_next.xmax = (cmd_x > rec.xmax) ? cmd_x : rec.xmax;
      rec_next.ymin = (cmd_y < rec.ymin) ? cmd_y : rec.ymin;
      rec_next.ymax = (cmd_y > rec.ymax) ? cmd_y : rec.ymax;
    end
  end

  logic [TH_W:0] cnt_inc;
  assign cnt_inc = {1'b0, cnt} + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occupied <= 1'b0;
      status   <= 1'b0;
      rp       <= '0;
      rec      <= '0;
      cnt      <= '0;
      upd      <= 1'b0;
    end else begin
      upd <= 1'b0;
      if (in_valid) status <= hit_now;
      unique case (cmd)
        PE_LOAD: begin
          occupied <= 1'b1;
          rp       <= '{id: ID, box: cmd_rp.box, size: cmd_rp.size};
          cnt      <= '0;
        end
        PE_CLEAR: begin
          occupied <= 1'b0;
          status   <= 1'b0;
          cnt      <= '0;
        end
        PE_HIT: begin
          if (cnt_inc > {1'b0, th}) begin
            rp.box  <= rec_next;
            rp.size <= (cnt_inc > (TH_W+1)'({SIZE_W{1'b1}})) ? {SIZE_W{1'b1}}
                                                            : SIZE_W'(cnt_inc);
            cnt     <= '0;
            upd     <= 1'b1;
          end else begin
            cnt <= cnt_inc[TH_W-1:0];
            rec <= rec_next;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
