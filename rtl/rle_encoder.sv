// rle_encoder: run-length encodes the rows of a filtered event frame into
// slices. A slice is a run of adjacent set pixels in one row, described by
// (row, col1, col2) with col1 <= col2 its first and last column.
//
// A row is taken in one handshake and then scanned one column per cycle. A run
// starts at a set pixel after a clear one and ends at a clear pixel or at the
// row's end; the finished slice is put in the output register. After the last
// row of a frame, an end-of-frame token (out_eof = 1, no slice) follows the
// last slice so the RPU knows the frame is complete.
//
// Interface: in_valid/in_ready/in_idx/in_data/in_last; out_valid/out_ready/
// out_slice/out_eof.
// Timing: W cycles per row (plus stalls when out_ready is low), so W x H
// cycles per frame, the order of the W x (H+5) frame-mode latency the paper
// reports.
//
// Follows the paper: slices of adjacent events, row by row, as
// "Row, Col1, Col2". Own choices: the serial one-column-per-cycle scan and
// the end-of-frame token.
module rle_encoder
  import anti_uav_pkg::*;
#(
  parameter int unsigned W = IMG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  coord_t       in_idx,
  input  logic [W-1:0] in_data,
  input  logic         in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output slice_t       out_slice,
  output logic         out_eof
);

  logic [W-1:0] row;
  coord_t       row_idx;
  logic         row_last;
  logic         busy;
  coord_t       col;
  logic         in_run;
  coord_t       run_start;
  logic         eof_pending;

  wire step    = busy && (!out_valid || out_ready);
  wire bit_now = row[col];
  wire at_end  = col == coord_t'(W - 1);

  assign in_ready = !busy && !eof_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row         <= '0;
      row_idx     <= '0;
      row_last    <= 1'b0;
      busy        <= 1'b0;
      col         <= '0;
      in_run      <= 1'b0;
      run_start   <= '0;
      eof_pending <= 1'b0;
      out_valid   <= 1'b0;
      out_slice   <= '0;
      out_eof     <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;

      if (in_valid && in_ready) begin
        row      <= in_data;
        row_idx  <= in_idx;
        row_last <= in_last;
        busy     <= 1'b1;
        col      <= '0;
        in_run   <= 1'b0;
      end else if (step) begin
        if (bit_now && !in_run) begin
          in_run    <= 1'b1;
          run_start <= col;
        end
        if (in_run && !bit_now) begin
          in_run    <= 1'b0;
          out_valid <= 1'b1;
          out_eof   <= 1'b0;
          out_slice <= '{row: row_idx, c1: run_start, c2: col - 1'b1};
        end else if (at_end && bit_now) begin
          in_run    <= 1'b0;
          out_valid <= 1'b1;
          out_eof   <= 1'b0;
          out_slice <= '{row: row_idx, c1: (in_run ? run_start : col), c2: col};
        end
        if (at_end) begin
          busy        <= 1'b0;
          eof_pending <= row_last;
        end else begin
          col <= col + 1'b1;
        end
      end else if (eof_pending && (!out_valid || out_ready)) begin
        eof_pending <= 1'b0;
        out_valid   <= 1'b1;
        out_eof     <= 1'b1;
        out_slice   <= '0;
      end
    end
  end

endmodule
