// rp_monitor: watches one RPU PE for the Fast Object Tracking Unit (FOTU).
//
// On every event-mode RP update (upd) the monitor computes the RP's area
// (width x height) and centre, and compares them with the previous update:
// speed is the Manhattan displacement of the centre between the two updates
// and dArea the absolute change of the area. If size or location changed, the
// PE's threshold is recalibrated as
//     TH* = Bias + Wa x Area + Ws x Speed
// with Wa and Ws unsigned fixed-point numbers with four fraction bits, the
// result clamped to 1..255. Before the first update of an object, TH is Bias
// (at least 1). If dArea > th_a or Speed > th_s the object is
// marked fast (sticky until the PE is freed). For a fast object a trajectory
// point (centre, time stamp) is offered to the arbiter whenever the centre has
// moved more than `step` pixels in x or in y from the last recorded point (the
// first point is always offered). A point not yet accepted is replaced by a
// newer one.
//
// Interface: upd/rp/freed from the PE; th to the PE; fast; req/point/ack to
// the arbiter. Timing: th and the request appear the cycle after upd.
//
// Follows the paper (Fig. 4): the TH formula, the dArea/speed test, recording
// only fast objects and only steps above four pixels. Own choices: speed as
// displacement per RP update (the chip has no time base described), the
// fixed-point format of the weights, and the clamp.
module rp_monitor
  import anti_uav_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      bias,
  input  logic [7:0]      wa,
  input  logic [7:0]      ws,
  input  logic [17:0]     th_a,
  input  logic [CW:0]     th_s,
  input  coord_t          step,
  input  logic [13:0]     stamp,
  input  logic            upd,
  input  rp_t             rp,
  input  logic            freed,
  output logic [TH_W-1:0] th,
  output logic            fast,
  output logic            req,
  output traj_point_t     point,
  input  logic            ack
);

  logic        have_prev, have_rec;
  logic [TH_W-1:0] th_q;
  logic [17:0] parea;
  coord_t      pcx, pcy, rx, ry;

  coord_t      w, h, cx, cy;
  logic [17:0] area, darea;
  logic [CW:0] speed;
  logic [27:0] th_raw;
  logic        changed, is_fast, far;

  function automatic coord_t absdiff(input coord_t a, input coord_t b);
    return (a > b) ? a - b : b - a;
  endfunction

  always_comb begin
    w      = rp.box.xmax - rp.box.xmin + 1'b1;
    h      = rp.box.ymax - rp.box.ymin + 1'b1;
    area   = 18'(w) * 18'(h);
    cx     = coord_t'(({1'b0, rp.box.xmin} + {1'b0, rp.box.xmax}) >> 1);
    cy     = coord_t'(({1'b0, rp.box.ymin} + {1'b0, rp.box.ymax}) >> 1);
    speed  = have_prev ? ({1'b0, absdiff(cx, pcx)} + {1'b0, absdiff(cy, pcy)}) : '0;
    darea  = !have_prev ? '0 : (area > parea) ? area - parea : parea - area;
    changed = !have_prev || area != parea || cx != pcx || cy != pcy;
    th_raw = 28'(bias) + ((28'(wa) * 28'(area)) >> 4) + ((28'(ws) * 28'(speed)) >> 4);
    is_fast = fast || (darea > th_a) || (speed > th_s);
    far     = !have_rec || (absdiff(cx, rx) > step) || (absdiff(cy, ry) > step);
  end

  // until the first update of an object the threshold is the configured bias
  assign th = !have_prev ? ((bias == '0) ? TH_W'(1) : bias) : th_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_prev <= 1'b0;
      have_rec  <= 1'b0;
      parea     <= '0;
      pcx       <= '0;
      pcy       <= '0;
      rx        <= '0;
      ry        <= '0;
      th_q      <= '0;
      fast      <= 1'b0;
      req       <= 1'b0;
      point     <= '0;
    end else if (freed) begin
      have_prev <= 1'b0;
      have_rec  <= 1'b0;
      fast      <= 1'b0;
      req       <= 1'b0;
    end else begin
      if (req && ack) req <= 1'b0;
      if (upd) begin
        have_prev <= 1'b1;
        parea     <= area;
        pcx       <= cx;
        pcy       <= cy;
        if (changed)
          th_q <= (th_raw > 28'd255) ? 8'd255 : (th_raw == '0) ? 8'd1 : TH_W'(th_raw);
        fast <= is_fast;
        if (is_fast && far) begin
          have_rec <= 1'b1;
          rx       <= cx;
          ry       <= cy;
          req      <= 1'b1;
          point    <= '{x: cx, y: cy, stamp: stamp};
        end
      end
    end
  end

endmodule
