// isp: Image Signal Processor. Prepares the gray-image patch of one tracked
// object for classification by the NPU.
//
// The gray frame arrives as a raster-order pixel stream (pix_x, pix_y, pix).
// start latches the region of interest (ROI, an RP box from the ESP) and arms
// the unit; processing begins with the next pixel (0, 0), i.e. the next whole
// frame. Three steps follow on the fly:
//   ROI segmentation - pixels outside the box are accepted and dropped;
//   ROI denoising    - a 3-tap horizontal median over the current and the two
//                      previous ROI pixels of the row (the first pixel of a
//                      row is replicated), which removes single-pixel spikes;
//   ROI reshape      - nearest-neighbour resizing to a PW x PH patch: output
//                      column u takes source column (u*w) >> log2(PW) of the
//                      ROI, output row v source row (v*h) >> log2(PH).
// Sampled pixels of a source row are collected in a PW-pixel line buffer;
// when the last ROI pixel of the row has been taken, the line is written out
// once for every output row that maps to that source row. The input is
// stalled (pix_ready low) while one pixel feeds several output columns
// (enlarging) and while a line is written out; while idle it takes and
// drops every pixel.
//
// Interface: out_valid/out_addr/out_data write the patch in raster order,
// address v*PW + u, with no back-pressure; done pulses after the last pixel.
// Timing: one input pixel per cycle except during the stalls above; a line
// write-out takes PW cycles.
//
// The paper names the three steps only. The median filter, the nearest-
// neighbour scaling and the 32 x 32 patch size are this design's choices.
module isp
  import anti_uav_pkg::*;
#(
  parameter int unsigned PW = 32,
  parameter int unsigned PH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  box_t        roi,
  input  logic        pix_valid,
  output logic        pix_ready,
  input  coord_t      pix_x,
  input  coord_t      pix_y,
  input  logic [7:0]  pix,
  output logic        out_valid,
  output logic [$clog2(PW*PH)-1:0] out_addr,
  output logic [7:0]  out_data,
  output logic        busy,
  output logic        done
);

  localparam int unsigned SW = $clog2(PW);
  localparam int unsigned SH = $clog2(PH);

  box_t        box;
  logic [SW:0] u, fu;
  logic [SH:0] v;
  logic        flushing;
  logic        synced;        // the current frame started after start
  logic [7:0]  a1, a2;
  logic [7:0]  line [PW];

  coord_t      w, h, p, q;
  logic [CW+SW:0] pu, pu1;
  logic [CW+SH:0] qv, qv1;
  logic        in_roi, row_hit, col_hit, more, row_end;
  logic [7:0]  m0, m1, den;

  function automatic logic [7:0] med3(input logic [7:0] x, input logic [7:0] y,
                                      input logic [7:0] z);
    logic [7:0] lo, hi;
    lo = (x < y) ? x : y;
    hi = (x < y) ? y : x;
    return (z < lo) ? lo : (z > hi) ? hi : z;
  endfunction

  always_comb begin
    w       = box.xmax - box.xmin + 1'b1;
    h       = box.ymax - box.ymin + 1'b1;
    p       = pix_x - box.xmin;
    q       = pix_y - box.ymin;
    pu      = ((CW+SW+1)'(u) * (CW+SW+1)'(w)) >> SW;
    pu1     = ((CW+SW+1)'(u + 1'b1) * (CW+SW+1)'(w)) >> SW;
    qv      = ((CW+SH+1)'(v) * (CW+SH+1)'(h)) >> SH;
    qv1     = ((CW+SH+1)'(v + 1'b1) * (CW+SH+1)'(h)) >> SH;
    in_roi  = (synced || (pix_x == '0 && pix_y == '0))
           && pix_x >= box.xmin && pix_x <= box.xmax && pix_y >= box.ymin && pix_y <= box.ymax;
    row_hit = in_roi && (v < (SH+1)'(PH)) && ((CW+SH+1)'(q) == qv);
    col_hit = row_hit && (u < (SW+1)'(PW)) && ((CW+SW+1)'(p) == pu);
    // another output column maps to this same source pixel: hold the input
    more    = col_hit && (u + 1'b1 < (SW+1)'(PW)) && ((CW+SW+1)'(p) == pu1);
    row_end = row_hit && pix_x == box.xmax;
    m0      = (p == '0) ? pix : a1;
    m1      = (p == '0) ? pix : (p == 9'd1) ? a1 : a2;
    den     = med3(pix, m0, m1);
  end

  assign pix_ready = !busy || (!flushing && !more);   // idle: pixels pass by
  wire take = pix_valid && pix_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      box       <= '0;
      u         <= '0;
      fu        <= '0;
      v         <= '0;
      flushing  <= 1'b0;
      synced    <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      a1        <= '0;
      a2        <= '0;
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_data  <= '0;
      for (int i = 0; i < PW; i++) line[i] <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      if (start) begin
        box      <= roi;
        u        <= '0;
        v        <= '0;
        flushing <= 1'b0;
        synced   <= 1'b0;
        busy     <= 1'b1;
      end else if (flushing) begin
        out_valid <= 1'b1;
        out_addr  <= {v[SH-1:0], fu[SW-1:0]};
        out_data  <= line[fu[SW-1:0]];
        if (fu == (SW+1)'(PW - 1)) begin
          fu <= '0;
          v  <= v + 1'b1;
          // the next output row maps to the same source row: write it again
          if (!(v + 1'b1 < (SH+1)'(PH) && qv1 == qv)) begin
            flushing <= 1'b0;
            u        <= '0;
            if (v + 1'b1 == (SH+1)'(PH)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end else begin
          fu <= fu + 1'b1;
        end
      end else if (busy && pix_valid && col_hit) begin
        // one output column per cycle from the current (denoised) pixel
        line[u[SW-1:0]] <= den;
        u <= u + 1'b1;
      end
      if (take && pix_x == '0 && pix_y == '0) synced <= busy;
      if (take && in_roi) begin
        a2 <= a1;
        a1 <= pix;
        if (row_end) begin
          flushing <= 1'b1;
          fu       <= '0;
        end
      end
    end
  end

endmodule
