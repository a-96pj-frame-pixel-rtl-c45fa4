// frame_builder: turns the asynchronous AER event stream into binary event
// images ("event frames").
//
// Every accepted event (x, y) sets one bit of the frame memory, an array of
// H rows of W bits. A cycle timer defines the accumulation interval: when it
// reaches frame_period the builder scans the memory out, one whole row per
// valid/ready handshake, top row first, and clears each row as it is handed
// over, so the memory is empty again for the next interval. Events keep being
// accepted during the scan; an event that hits the row being cleared in that
// very cycle is kept for the next frame. en = 0 stops the timer (used while the
// RPU runs in event mode and no frames are needed).
//
// Interface: ev_valid/ev (always accepted), row_valid/row_ready/row_idx/
// row_data/row_last (row_last marks row H-1). frame_start pulses when a scan
// begins.
// Timing: the first row is offered the cycle after the timer expires; one row
// per cycle when row_ready stays high.
//
// Follows the paper: an AER interface writing a frame memory that is rebuilt
// periodically. Own choices: the row-wide memory organisation and read-clear
// scan. The paper sizes the frame memory at 20 Kbit, which is less than one bit
// per pixel of a 346 x 260 sensor (89,960 bits); how it was made to fit is not
// described, so this memory holds one bit per pixel.
module frame_builder
  import anti_uav_pkg::*;
#(
  parameter int unsigned W = IMG_W,
  parameter int unsigned H = IMG_H
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [31:0]   frame_period,
  input  logic          ev_valid,
  input  aer_event_t    ev,
  output logic          frame_start,
  output logic          row_valid,
  input  logic          row_ready,
  output coord_t        row_idx,
  output logic [W-1:0]  row_data,
  output logic          row_last
);

  logic [W-1:0] mem [H];
  logic [31:0]  timer;
  logic         scanning;
  coord_t       scan_row;

  wire ev_ok    = ev_valid && (ev.x < coord_t'(W)) && (ev.y < coord_t'(H));
  wire row_take = row_valid && row_ready;
  wire start    = en && !scanning && (timer + 32'd1 >= frame_period);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer    <= '0;
      scanning <= 1'b0;
      scan_row <= '0;
    end else begin
      if (start) begin
        timer    <= '0;
        scanning <= 1'b1;
        scan_row <= '0;
      end else if (en && !scanning) begin
        timer <= timer + 32'd1;
      end
      if (row_take) begin
        if (scan_row == coord_t'(H - 1)) scanning <= 1'b0;
        else                             scan_row <= scan_row + 1'b1;
      end
    end
  end

  // frame memory: event write and read-clear of the scanned row
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < H; r++) mem[r] <= '0;
    end else begin
      if (row_take) mem[scan_row] <= '0;
      if (ev_ok) begin
        if (row_take && ev.y == scan_row) mem[ev.y] <= W'(1) << ev.x;
        else                              mem[ev.y][ev.x] <= 1'b1;
      end
    end
  end

  assign frame_start = start;
  assign row_valid   = scanning;
  assign row_idx     = scan_row;
  assign row_data    = mem[scan_row];
  assign row_last    = scan_row == coord_t'(H - 1);

endmodule
